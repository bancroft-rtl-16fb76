// tb_filter_memctrl: sends random filter lookups, about half of them with
// the nibble actually stored in the simulated table, through the controller
// to a behavioural HBM channel with latency and random stalls, and checks
// every result (tag, lane, hit) in order against the table model.
module tb_filter_memctrl;
  import bancroft_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst = 1;
  logic req_valid, req_ready, rsp_valid;
  flt_req_t req;
  flt_rsp_t rsp;
  logic hv, hr, sv;
  logic [22:0] ha;
  logic [255:0] sd;
  int checks = 0, failures = 0, hits = 0;
  always #5 clk = ~clk;

  filter_memctrl #(.HBM_DW(256), .HBM_AW(23), .OUTST(8)) dut (.clk, .rst, .req_valid, .req_ready, .req,
    .hbm_req_valid(hv), .hbm_req_ready(hr), .hbm_req_addr(ha), .hbm_rsp_valid(sv), .hbm_rsp_data(sd),
    .rsp_valid, .rsp);
  hbm_model #(.DW(256), .AW(23), .KIND(1), .PC_ID(5), .LAT(15)) u_hbm (.clk, .rst,
    .req_valid(hv), .req_ready(hr), .req_addr(ha), .rsp_valid(sv), .rsp_data(sd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  flt_rsp_t expq [$];
  int n_in = 0;
  always @(posedge clk) if (!rst) begin
    if (req_valid && req_ready) begin
      flt_rsp_t e;
      n_in++;
      e.tag = req.tag; e.lane = req.lane;
      e.hit = (filt_nib(5, req.idx) == req.nib);
      expq.push_back(e);
    end
    if (rsp_valid) begin
      flt_rsp_t e;
      e = expq.pop_front();
      checks++;
      if (rsp !== e) begin failures++; $display("rsp %p exp %p", rsp, e); end
      if (rsp.hit) hits++;
    end
  end

  initial begin
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int t = 0; t < 400; t++) begin
      int target;
      req.idx  = {3'b000, 29'($urandom)};
      req.tag  = CTAG_W'($urandom);
      req.lane = 2'($urandom);
      req.nib  = ($urandom % 2) ? filt_nib(5, req.idx) : 4'($urandom);
      req_valid = 1;
      target = n_in + 1;
      while (n_in < target) @(negedge clk);
      if (t % 50 == 0) begin req_valid = 0; repeat (20) @(negedge clk); end
    end
    req_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    checks++;
    if (hits < 100) begin failures++; $display("only %0d hits", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
