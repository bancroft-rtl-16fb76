// bancroft_decompressor: one decompression channel. It expands a stream of
// compressed 32-bit words into 2-bit bases for the user kernel, fetching
// matched k-mers from its own copy of the reference genome in HBM.
//
//   compressed words -> decomp_parser --verbatim runs--> verbatim FIFO --\
//                                    --k-mer runs--> ref_router --------> shuffler -> 512-bit beats
//                                    --piece order--> piece FIFO --------/
//   ref_router <-> N_PC x ref_memctrl <-> HBM pseudo channels (reference)
//
// A job is started with job_start/job_bases (decompressed length) and its
// compressed chunks are then streamed on in_*. The output is a valid/ready
// stream of 256-base beats; the last beat of a job has out_last and may be
// short (out_nbases). Each decompressor needs its own reference copy
// because reference lookups are random and use up the channels' bandwidth.
// Buffer depths are this design's choice; the piece FIFO is deep enough to
// keep the reference reads of the memory controllers in flight.
module bancroft_decompressor
  import bancroft_pkg::*;
#(
  parameter int unsigned N_PC          = 3,
  parameter int unsigned PC_WORDS_LOG2 = 22,
  parameter int unsigned VFIFO_DEPTH   = 16,
  parameter int unsigned PFIFO_DEPTH   = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     job_start,
  input  logic [31:0]              job_bases,
  output logic                     busy,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [3:0][31:0]         in_data,
  input  logic [2:0]               in_nwords,
  output logic [N_PC-1:0]          hbm_req_valid,
  input  logic [N_PC-1:0]          hbm_req_ready,
  output logic [PC_WORDS_LOG2-1:0] hbm_req_addr [N_PC],
  input  logic [N_PC-1:0]          hbm_rsp_valid,
  input  logic [BUS_W-1:0]         hbm_rsp_data [N_PC],
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [BUS_W-1:0]         out_data,
  output logic [8:0]               out_nbases,
  output logic                     out_last
);
  logic     rq_valid, rq_ready;
  ref_req_t rq;
  logic     pv_valid, pv_ready, pf_valid, pf_ready;
  piece_t   pv, pf;
  logic     vv_valid, vv_ready, vf_valid, vf_ready;
  logic [3:0][31:0] vv_data, vf_data;
  logic [2:0] vv_n;

  decomp_parser u_parser (
    .clk, .rst, .job_start, .job_bases, .busy,
    .in_valid, .in_ready, .in_data, .in_nwords,
    .ref_valid(rq_valid), .ref_ready(rq_ready), .ref_req(rq),
    .verb_valid(vv_valid), .verb_ready(vv_ready), .verb_data(vv_data), .verb_n(vv_n),
    .piece_valid(pv_valid), .piece_ready(pv_ready), .piece(pv));

  // verbatim words are masked by the piece length in the shuffler; the word
  // count is not needed beyond the parser
  logic unused_vn;
  assign unused_vn = ^vv_n;

  sync_fifo #(.W(128), .DEPTH(VFIFO_DEPTH)) u_vfifo (
    .clk, .rst,
    .in_valid(vv_valid), .in_ready(vv_ready), .in_data(vv_data),
    .out_valid(vf_valid), .out_ready(vf_ready), .out_data(vf_data), .count());

  sync_fifo #(.W($bits(piece_t)), .DEPTH(PFIFO_DEPTH)) u_pfifo (
    .clk, .rst,
    .in_valid(pv_valid), .in_ready(pv_ready), .in_data(pv),
    .out_valid(pf_valid), .out_ready(pf_ready), .out_data(pf), .count());

  logic [N_PC-1:0]          mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
  logic [PC_WORDS_LOG2-1:0] mreq_addr [N_PC];
  logic [BUS_W-1:0]         mrsp_data [N_PC];
  logic                     rr_valid, rr_ready;
  logic [BUS_W-1:0]         rr_data;
  logic [8:0]               rr_nb;

  ref_router #(.N_PC(N_PC), .PC_WORDS_LOG2(PC_WORDS_LOG2)) u_router (
    .clk, .rst,
    .in_valid(rq_valid), .in_ready(rq_ready), .in_req(rq),
    .pc_req_valid(mreq_valid), .pc_req_ready(mreq_ready), .pc_req_addr(mreq_addr),
    .pc_rsp_valid(mrsp_valid), .pc_rsp_ready(mrsp_ready), .pc_rsp_data(mrsp_data),
    .out_valid(rr_valid), .out_ready(rr_ready), .out_data(rr_data), .out_nbases(rr_nb));

  logic [8:0] unused_nb;
  assign unused_nb = rr_nb;

  for (genvar p = 0; p < N_PC; p++) begin : g_pc
    ref_memctrl #(.DW(BUS_W), .AW(PC_WORDS_LOG2)) u_mc (
      .clk, .rst,
      .req_valid(mreq_valid[p]), .req_ready(mreq_ready[p]), .req_addr(mreq_addr[p]),
      .hbm_req_valid(hbm_req_valid[p]), .hbm_req_ready(hbm_req_ready[p]), .hbm_req_addr(hbm_req_addr[p]),
      .hbm_rsp_valid(hbm_rsp_valid[p]), .hbm_rsp_data(hbm_rsp_data[p]),
      .rsp_valid(mrsp_valid[p]), .rsp_ready(mrsp_ready[p]), .rsp_data(mrsp_data[p]));
  end

  shuffler u_shuf (
    .clk, .rst,
    .piece_valid(pf_valid), .piece_ready(pf_ready), .piece(pf),
    .verb_valid(vf_valid), .verb_ready(vf_ready), .verb_data(vf_data),
    .ref_valid(rr_valid), .ref_ready(rr_ready), .ref_data(rr_data),
    .out_valid, .out_ready, .out_data, .out_nbases, .out_last);
endmodule
