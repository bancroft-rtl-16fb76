// ref_memctrl: read controller for one HBM pseudo channel holding part of the
// reference genome of a decompressor.
//
// Word reads (DW bits each) are passed to the HBM port while fewer than
// OUTST reads are in flight or waiting in the response buffer; every
// returning word is stored in an OUTST-deep FIFO, so HBM never has to be
// stalled (its response port has no ready). rsp_* presents the words in
// request order with valid/ready. The bound on outstanding reads is what
// lets random reference lookups overlap HBM latency; its size is a choice of
// this design.
module ref_memctrl #(
  parameter int unsigned DW    = 512,
  parameter int unsigned AW    = 22,    // 256 MB / 64 B words
  parameter int unsigned OUTST = 8
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          hbm_req_valid,
  input  logic          hbm_req_ready,
  output logic [AW-1:0] hbm_req_addr,
  input  logic          hbm_rsp_valid,
  input  logic [DW-1:0] hbm_rsp_data,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output logic [DW-1:0] rsp_data
);
  localparam int unsigned CW = $clog2(OUTST) + 1;
  logic [CW-1:0] inflight_q;   // issued, not yet returned
  logic [CW-1:0] fcount;
  logic          issue, fifo_in_ready;

  assign hbm_req_valid = req_valid && ((inflight_q + fcount) < CW'(OUTST));
  assign hbm_req_addr  = req_addr;
  assign req_ready     = hbm_req_ready && ((inflight_q + fcount) < CW'(OUTST));
  assign issue         = hbm_req_valid && hbm_req_ready;

  sync_fifo #(.W(DW), .DEPTH(OUTST)) u_rsp (
    .clk, .rst,
    .in_valid(hbm_rsp_valid), .in_ready(fifo_in_ready), .in_data(hbm_rsp_data),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp_data), .count(fcount));

  always_ff @(posedge clk) begin
    if (rst) inflight_q <= '0;
    else     inflight_q <= inflight_q + CW'(issue) - CW'(hbm_rsp_valid);
  end

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) hbm_rsp_valid |-> fifo_in_ready)
    else $error("ref_memctrl: response buffer overflow");
`endif
endmodule
