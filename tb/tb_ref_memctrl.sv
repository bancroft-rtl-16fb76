// tb_ref_memctrl: random word reads through the controller to a
// behavioural HBM channel with latency and stalls, with random consumer
// readiness; checks that every word returns in order with the right data
// and that no more than OUTST reads are ever outstanding.
module tb_ref_memctrl;
  import tb_pkg::*;
  logic clk = 0, rst = 1;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  logic [21:0] req_addr, ha;
  logic [511:0] rsp_data, sd;
  logic hv, hr, sv;
  int checks = 0, failures = 0, max_out = 0, outst = 0;
  always #5 clk = ~clk;

  ref_memctrl #(.DW(512), .AW(22), .OUTST(8)) dut (.clk, .rst, .req_valid, .req_ready, .req_addr,
    .hbm_req_valid(hv), .hbm_req_ready(hr), .hbm_req_addr(ha), .hbm_rsp_valid(sv), .hbm_rsp_data(sd),
    .rsp_valid, .rsp_ready, .rsp_data);
  hbm_model #(.DW(512), .AW(22), .KIND(0), .PC_ID(1), .GLOBAL_LOG2(22), .LAT(20)) u_hbm (
    .clk, .rst, .req_valid(hv), .req_ready(hr), .req_addr(ha), .rsp_valid(sv), .rsp_data(sd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [21:0] q [$];
  int n_in = 0;
  always @(posedge clk) if (!rst) begin
    if (hv && hr) outst++;
    if (rsp_valid && rsp_ready) outst--;
    if (outst > max_out) max_out = outst;
    if (req_valid && req_ready) begin n_in++; q.push_back(req_addr); end
    if (rsp_valid && rsp_ready) begin
      logic [21:0] a;
      a = q.pop_front();
      checks++;
      if (rsp_data !== ref_word((32'd1 << 22) + 32'(a))) begin failures++; $display("word %h wrong", a); end
    end
  end

  initial begin
    req_valid = 0; req_addr = 0; rsp_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int t = 0; t < 500; t++) begin
      int target;
      req_valid = 1; req_addr = 22'($urandom);
      target = n_in + 1;
      while (n_in < target) begin
        rsp_ready = (t > 100 && t < 200) ? (($urandom % 8) == 0) : (($urandom % 4) != 0);
        @(negedge clk);
      end
    end
    req_valid = 0; rsp_ready = 1;
    repeat (60) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d words missing", q.size()); end
    checks++;
    if (max_out > 8) begin failures++; $display("%0d reads outstanding", max_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
