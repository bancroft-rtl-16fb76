// filter_memctrl: probabilistic-filter lookup on one HBM pseudo channel.
//
// The filter is a small cuckoo-shaped table in HBM with the same slots as the
// software offset table, but each slot holds only 4 bits: the low 4 bits of
// the reference k-mer stored there. A lookup carries the slot index and
// str[3:0] of the target k-mer; if the stored nibble differs, software can
// skip that hash (hit = 0). Since HBM cannot return less than one burst,
// each lookup reads the HBM_DW-bit word holding the nibble: nibble n is at
// word n / (HBM_DW/4), bits 4*(n mod HBM_DW/4) +: 4 (layout chosen here).
// Requests are accepted while fewer than OUTST are in flight; their
// bookkeeping waits in a FIFO, and HBM answers in request order (one read ID),
// so the head of the FIFO matches each returning word. The result is
// registered: rsp_valid one cycle after hbm_rsp_valid. The consumer must
// always accept rsp (the encoder has a slot reserved for every lookup).
module filter_memctrl
  import bancroft_pkg::*;
#(
  parameter int unsigned HBM_DW = 256,
  parameter int unsigned HBM_AW = 23,   // 256 MB / 32 B words
  parameter int unsigned OUTST  = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              req_valid,
  output logic              req_ready,
  input  flt_req_t          req,
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output logic [HBM_AW-1:0] hbm_req_addr,
  input  logic              hbm_rsp_valid,
  input  logic [HBM_DW-1:0] hbm_rsp_data,
  output logic              rsp_valid,
  output flt_rsp_t          rsp
);
  localparam int unsigned NPW = HBM_DW / 4;          // nibbles per word
  localparam int unsigned SW  = $clog2(NPW);

  typedef struct packed {
    logic [SW-1:0]     sel;
    logic [3:0]        nib;
    logic [CTAG_W-1:0] tag;
    logic [1:0]        lane;
  } pend_t;

  pend_t pend_in, pend_out;
  logic  pend_ready, pend_valid;

  assign pend_in.sel  = req.idx[SW-1:0];
  assign pend_in.nib  = req.nib;
  assign pend_in.tag  = req.tag;
  assign pend_in.lane = req.lane;

  assign hbm_req_valid = req_valid && pend_ready;
  assign hbm_req_addr  = HBM_AW'(req.idx >> SW);
  assign req_ready     = hbm_req_ready && pend_ready;

  sync_fifo #(.W($bits(pend_t)), .DEPTH(OUTST)) u_pend (
    .clk, .rst,
    .in_valid (req_valid && req_ready), .in_ready (pend_ready), .in_data (pend_in),
    .out_valid(pend_valid), .out_ready(hbm_rsp_valid), .out_data(pend_out),
    .count());

  always_ff @(posedge clk) begin
    if (rst) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= hbm_rsp_valid && pend_valid;
      if (hbm_rsp_valid) begin
        rsp.tag  <= pend_out.tag;
        rsp.lane <= pend_out.lane;
        rsp.hit  <= (hbm_rsp_data[4*pend_out.sel +: 4] == pend_out.nib);
      end
    end
  end

`ifndef SYNTHESIS
  a_rsp_has_req: assert property (@(posedge clk) disable iff (rst) hbm_rsp_valid |-> pend_valid)
    else $error("filter_memctrl: HBM response without a request");
`endif
endmodule
