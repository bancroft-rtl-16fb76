// hbm_model: behavioural model of one HBM pseudo channel's read port, for
// simulation only. Reads are accepted with valid/ready (ready drops at
// random when STALL = 1) and answered in order after LAT cycles. Contents
// are computed, not stored: KIND 0 returns reference word
// (PC_ID << GLOBAL_LOG2) + addr of tb_pkg::ref_word, KIND 1 returns
// tb_pkg::filt_word(PC_ID, addr).
module hbm_model
  import tb_pkg::*;
#(
  parameter int unsigned DW          = 512,
  parameter int unsigned AW          = 22,
  parameter int unsigned KIND        = 0,
  parameter int unsigned PC_ID       = 0,
  parameter int unsigned GLOBAL_LOG2 = 22,
  parameter int unsigned LAT         = 12,
  parameter bit          STALL       = 1'b1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data
);
  logic          pv [LAT];
  logic [AW-1:0] pa [LAT];
  int unsigned   reads;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pa[i] <= '0; end
      req_ready <= 1'b0;
      reads <= 0;
    end else begin
      pv[0] <= req_valid && req_ready;
      pa[0] <= req_addr;
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
      req_ready <= STALL ? (($urandom % 5) != 0) : 1'b1;
      if (req_valid && req_ready) reads <= reads + 1;
    end
  end

  assign rsp_valid = pv[LAT-1];
  always_comb begin
    if (KIND == 0) rsp_data = DW'(ref_word((32'(PC_ID) << GLOBAL_LOG2) + 32'(pa[LAT-1])));
    else           rsp_data = DW'(filt_word(int'(PC_ID), 32'(pa[LAT-1])));
  end
endmodule
