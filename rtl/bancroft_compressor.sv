// bancroft_compressor: the hardware half of reference-based compression.
//
// Software owns the large cuckoo offset table and does the matching; this
// block supplies, for every 16-base stride of the target, the new stride, the
// four cuckoo hashes of the current 64-base k-mer, and a 4-bit probabilistic
// filter verdict per hash that lets software skip most table lookups.
//
// Datapath (as drawn in the paper's compressor figure):
//   ASCII input -> ascii_parser --\
//   binary 32-bit strides ---------+-> stride_shifter -> k-mer (128 bit)
//   k-mer   -> Hash1 (seed 1), Hash2 (seed 2)
//   rc(k-mer) -> Hash1, Hash2          (reverse-complement strand)
//   hashes -> FIFO -> filter_router -> N_PC x filter_memctrl -> HBM PCs
//   stride, hashes, filter bits -> outbound_encoder -> records to software
// bin_mode selects the binary stride input instead of the ASCII parser.
// seq_start marks that the next stride starts a new sequence. A stride
// enters only when the encoder has a free tag; the hash pipeline (6 cycles)
// never stalls and its results wait in a FIFO as deep as the reorder buffer,
// so that FIFO cannot overflow. Filter lane l compares against str[3:0] of
// the forward k-mer (l = 0, 1) or of its reverse complement (l = 2, 3).
module bancroft_compressor
  import bancroft_pkg::*;
#(
  parameter int unsigned N_PC     = 8,
  parameter int unsigned HBM_DW   = 256,
  parameter int unsigned HBM_AW   = 23,
  parameter int unsigned IN_BYTES = 16,
  parameter logic [31:0] SEED1    = 32'h0000_0001,
  parameter logic [31:0] SEED2    = 32'h0000_0002
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  bin_mode,
  input  logic                  seq_start,
  // ASCII input
  input  logic [8*IN_BYTES-1:0] ascii_data,
  input  logic [IN_BYTES-1:0]   ascii_keep,
  input  logic                  ascii_valid,
  output logic                  ascii_ready,
  input  logic                  ascii_flush,
  // binary input (2-bit bases, 16 per word)
  input  logic [31:0]           bin_stride,
  input  logic                  bin_valid,
  output logic                  bin_ready,
  // HBM pseudo channels holding the filter table
  output logic [N_PC-1:0]       hbm_req_valid,
  input  logic [N_PC-1:0]       hbm_req_ready,
  output logic [HBM_AW-1:0]     hbm_req_addr [N_PC],
  input  logic [N_PC-1:0]       hbm_rsp_valid,
  input  logic [HBM_DW-1:0]     hbm_rsp_data [N_PC],
  // records to software
  output logic                  out_valid,
  input  logic                  out_ready,
  output cmp_rec_t              out_rec,
  output logic [31:0]           n_other
);
  // ---------------- input selection ----------------
  logic [31:0] a_stride;
  logic        a_valid, a_ready, a_partial;
  ascii_parser #(.IN_BYTES(IN_BYTES)) u_ascii (
    .clk, .rst,
    .in_data(ascii_data), .in_keep(ascii_keep), .in_valid(ascii_valid), .in_ready(ascii_ready),
    .flush(ascii_flush),
    .out_stride(a_stride), .out_partial(a_partial), .out_valid(a_valid), .out_ready(a_ready),
    .n_other);

  logic        s_valid, s_ready, first_pend_q;
  logic [31:0] s_stride;
  assign s_valid   = bin_mode ? bin_valid  : a_valid;
  assign s_stride  = bin_mode ? bin_stride : a_stride;
  assign bin_ready = bin_mode && s_ready;
  assign a_ready   = !bin_mode && s_ready;

  always_ff @(posedge clk) begin
    if (rst) first_pend_q <= 1'b1;
    else if (seq_start) first_pend_q <= 1'b1;
    else if (s_valid && s_ready) first_pend_q <= 1'b0;
  end

  // ---------------- stride shifter ----------------
  logic [127:0] kmer;
  logic [31:0]  sh_stride;
  logic         sh_kv, sh_valid, sh_ready;
  stride_shifter u_shift (
    .clk, .rst,
    .in_stride(s_stride), .in_first(first_pend_q || seq_start), .in_valid(s_valid), .in_ready(s_ready),
    .out_kmer(kmer), .out_stride(sh_stride), .out_kmer_valid(sh_kv),
    .out_valid(sh_valid), .out_ready(sh_ready));

  // ---------------- hashing ----------------
  logic [127:0]      kmer_rc;
  logic [CTAG_W-1:0] tag;
  logic              fire;
  revcomp #(.NB(K_BASES)) u_rc (.in_seq(kmer), .out_seq(kmer_rc));

  assign fire = sh_valid && sh_ready;

  logic [3:0][31:0] hv;
  logic [3:0]       hvalid;
  murmur3_hash #(.SEED(SEED1)) u_h0 (.clk, .rst, .en(1'b1), .in_key(kmer),    .in_valid(fire), .out_hash(hv[0]), .out_valid(hvalid[0]));
  murmur3_hash #(.SEED(SEED2)) u_h1 (.clk, .rst, .en(1'b1), .in_key(kmer),    .in_valid(fire), .out_hash(hv[1]), .out_valid(hvalid[1]));
  murmur3_hash #(.SEED(SEED1)) u_h2 (.clk, .rst, .en(1'b1), .in_key(kmer_rc), .in_valid(fire), .out_hash(hv[2]), .out_valid(hvalid[2]));
  murmur3_hash #(.SEED(SEED2)) u_h3 (.clk, .rst, .en(1'b1), .in_key(kmer_rc), .in_valid(fire), .out_hash(hv[3]), .out_valid(hvalid[3]));

  // side information travels beside the hash pipeline
  typedef struct packed {
    logic [CTAG_W-1:0] tag;
    logic              kv;
    logic [3:0][3:0]   nib;
  } side_t;
  side_t side_q [6];
  side_t side_in;
  assign side_in.tag = tag;
  assign side_in.kv  = sh_kv;
  assign side_in.nib = {kmer_rc[3:0], kmer_rc[3:0], kmer[3:0], kmer[3:0]};

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 6; i++) side_q[i] <= '0;
    end else begin
      side_q[0] <= side_in;
      for (int i = 1; i < 6; i++) side_q[i] <= side_q[i-1];
    end
  end

  // ---------------- lookup queue and router ----------------
  typedef struct packed {
    side_t            side;
    logic [3:0][31:0] h;
  } lk_t;
  lk_t lk_in, lk_out;
  logic lk_valid, lk_ready;
  assign lk_in.side = side_q[5];
  assign lk_in.h    = hv;

  sync_fifo #(.W($bits(lk_t)), .DEPTH(1 << CTAG_W)) u_lkq (
    .clk, .rst,
    .in_valid(hvalid[0]), .in_ready(), .in_data(lk_in),
    .out_valid(lk_valid), .out_ready(lk_ready), .out_data(lk_out), .count());

  logic [N_PC-1:0] rq_valid, rq_ready;
  flt_req_t        rq [N_PC];
  filter_router #(.N_PC(N_PC)) u_router (
    .clk, .rst,
    .in_valid(lk_valid), .in_ready(lk_ready), .in_hash(lk_out.h), .in_nib(lk_out.side.nib),
    .in_tag(lk_out.side.tag), .in_kmer_valid(lk_out.side.kv),
    .req_valid(rq_valid), .req_ready(rq_ready), .req(rq));

  logic [N_PC-1:0] rs_valid;
  flt_rsp_t        rs [N_PC];
  for (genvar p = 0; p < N_PC; p++) begin : g_pc
    filter_memctrl #(.HBM_DW(HBM_DW), .HBM_AW(HBM_AW)) u_mc (
      .clk, .rst,
      .req_valid(rq_valid[p]), .req_ready(rq_ready[p]), .req(rq[p]),
      .hbm_req_valid(hbm_req_valid[p]), .hbm_req_ready(hbm_req_ready[p]), .hbm_req_addr(hbm_req_addr[p]),
      .hbm_rsp_valid(hbm_rsp_valid[p]), .hbm_rsp_data(hbm_rsp_data[p]),
      .rsp_valid(rs_valid[p]), .rsp(rs[p]));
  end

  // ---------------- encoder ----------------
  outbound_encoder #(.N_PC(N_PC)) u_enc (
    .clk, .rst,
    .alloc_valid(sh_valid), .alloc_ready(sh_ready), .alloc_tag(tag),
    .alloc_stride(sh_stride), .alloc_kmer_valid(sh_kv),
    .hash_valid(hvalid[0]), .hash_tag(side_q[5].tag), .hash_val(hv),
    .rsp_valid(rs_valid), .rsp(rs),
    .out_valid, .out_ready, .out_rec);
endmodule
