// bancroft_top: an example accelerator built from the platform's parts: three
// decompressors and one compressor sharing the card's HBM (3 x 3 + 8 = 17
// pseudo channels), plus a pre-alignment filter as the user kernel.
//
// Each decompressor has its own three HBM pseudo channels with a full copy
// of the 2-bit reference genome, and its own compressed input stream from
// the host (PCIe DMA is outside this block, so the streams and all HBM
// channels are ports). Decompressor 0 supplies reads; decompressors 1..N-1
// supply the references the read is compared with, so N-1 filter lanes run
// side by side (a multi-reference filtering set-up). The four streams move
// together: a beat is taken from every decompressor in the same cycle, when
// all of them have one. Each lane reports a saturated edit-distance estimate
// and an accept flag per read/reference pair.
// The compressor works independently: input text or binary strides come in,
// one record per stride goes out to the host, and it reads its probabilistic
// filter table from its own 8 pseudo channels.
module bancroft_top
  import bancroft_pkg::*;
#(
  parameter int unsigned N_DECOMP      = 3,
  parameter int unsigned D_PC          = 3,
  parameter int unsigned D_PC_WORDS_LOG2 = 22,
  parameter int unsigned N_CPC         = 8,
  parameter int unsigned C_HBM_AW      = 23,
  parameter int unsigned E             = 5
) (
  input  logic                        clk,
  input  logic                        rst,
  // decompressor jobs and compressed input
  input  logic [N_DECOMP-1:0]         job_start,
  input  logic [31:0]                 job_bases [N_DECOMP],
  output logic [N_DECOMP-1:0]         dec_busy,
  input  logic [N_DECOMP-1:0]         dec_in_valid,
  output logic [N_DECOMP-1:0]         dec_in_ready,
  input  logic [3:0][31:0]            dec_in_data [N_DECOMP],
  input  logic [2:0]                  dec_in_nwords [N_DECOMP],
  // decompressor HBM channels, decompressor d uses d*D_PC .. d*D_PC+D_PC-1
  output logic [N_DECOMP*D_PC-1:0]    dhbm_req_valid,
  input  logic [N_DECOMP*D_PC-1:0]    dhbm_req_ready,
  output logic [D_PC_WORDS_LOG2-1:0]  dhbm_req_addr [N_DECOMP*D_PC],
  input  logic [N_DECOMP*D_PC-1:0]    dhbm_rsp_valid,
  input  logic [BUS_W-1:0]            dhbm_rsp_data [N_DECOMP*D_PC],
  // filter kernel
  input  logic [1:0]                  amend,
  output logic [N_DECOMP-2:0]         res_valid,
  output logic [2:0]                  res_dist [N_DECOMP-1],
  output logic [N_DECOMP-2:0]         res_accept,
  // compressor
  input  logic                        cmp_bin_mode,
  input  logic                        cmp_seq_start,
  input  logic [127:0]                cmp_ascii_data,
  input  logic [15:0]                 cmp_ascii_keep,
  input  logic                        cmp_ascii_valid,
  output logic                        cmp_ascii_ready,
  input  logic                        cmp_ascii_flush,
  input  logic [31:0]                 cmp_bin_stride,
  input  logic                        cmp_bin_valid,
  output logic                        cmp_bin_ready,
  output logic [N_CPC-1:0]            chbm_req_valid,
  input  logic [N_CPC-1:0]            chbm_req_ready,
  output logic [C_HBM_AW-1:0]         chbm_req_addr [N_CPC],
  input  logic [N_CPC-1:0]            chbm_rsp_valid,
  input  logic [255:0]                chbm_rsp_data [N_CPC],
  output logic                        cmp_out_valid,
  input  logic                        cmp_out_ready,
  output cmp_rec_t                    cmp_out_rec,
  output logic [31:0]                 cmp_n_other
);
  // ---------------- decompressors ----------------
  logic [N_DECOMP-1:0] d_valid, d_last;
  logic                d_ready;
  logic [BUS_W-1:0]    d_data [N_DECOMP];
  logic [8:0]          d_nb   [N_DECOMP];

  for (genvar d = 0; d < N_DECOMP; d++) begin : g_dec
    logic [D_PC-1:0]            rv, rr, sv;
    logic [D_PC_WORDS_LOG2-1:0] ra [D_PC];
    logic [BUS_W-1:0]           sd [D_PC];
    for (genvar p = 0; p < D_PC; p++) begin : g_map
      assign dhbm_req_valid[d*D_PC+p] = rv[p];
      assign dhbm_req_addr[d*D_PC+p]  = ra[p];
      assign rr[p] = dhbm_req_ready[d*D_PC+p];
      assign sv[p] = dhbm_rsp_valid[d*D_PC+p];
      assign sd[p] = dhbm_rsp_data[d*D_PC+p];
    end
    bancroft_decompressor #(.N_PC(D_PC), .PC_WORDS_LOG2(D_PC_WORDS_LOG2)) u_dec (
      .clk, .rst,
      .job_start(job_start[d]), .job_bases(job_bases[d]), .busy(dec_busy[d]),
      .in_valid(dec_in_valid[d]), .in_ready(dec_in_ready[d]),
      .in_data(dec_in_data[d]), .in_nwords(dec_in_nwords[d]),
      .hbm_req_valid(rv), .hbm_req_ready(rr), .hbm_req_addr(ra),
      .hbm_rsp_valid(sv), .hbm_rsp_data(sd),
      .out_valid(d_valid[d]), .out_ready(d_ready),
      .out_data(d_data[d]), .out_nbases(d_nb[d]), .out_last(d_last[d]));
  end

  // ---------------- filter kernel ----------------
  logic fire;
  assign fire    = &d_valid;
  assign d_ready = fire;

  for (genvar r = 1; r < N_DECOMP; r++) begin : g_lane
    shd_filter #(.E(E), .NB(BUS_BASES)) u_shd (
      .clk, .rst, .amend,
      .in_valid(fire), .in_read(d_data[0]), .in_ref(d_data[r]),
      .in_nbases(d_nb[0]), .in_last(d_last[0]),
      .res_valid(res_valid[r-1]), .res_dist(res_dist[r-1]), .res_accept(res_accept[r-1]));
  end

  // ---------------- compressor ----------------
  bancroft_compressor #(.N_PC(N_CPC), .HBM_DW(256), .HBM_AW(C_HBM_AW)) u_cmp (
    .clk, .rst,
    .bin_mode(cmp_bin_mode), .seq_start(cmp_seq_start),
    .ascii_data(cmp_ascii_data), .ascii_keep(cmp_ascii_keep), .ascii_valid(cmp_ascii_valid),
    .ascii_ready(cmp_ascii_ready), .ascii_flush(cmp_ascii_flush),
    .bin_stride(cmp_bin_stride), .bin_valid(cmp_bin_valid), .bin_ready(cmp_bin_ready),
    .hbm_req_valid(chbm_req_valid), .hbm_req_ready(chbm_req_ready), .hbm_req_addr(chbm_req_addr),
    .hbm_rsp_valid(chbm_rsp_valid), .hbm_rsp_data(chbm_rsp_data),
    .out_valid(cmp_out_valid), .out_ready(cmp_out_ready), .out_rec(cmp_out_rec),
    .n_other(cmp_n_other));
endmodule
