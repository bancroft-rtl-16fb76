// tb_ref_router: sends random reference requests (any base offset, 1..4
// k-mers, forward or reverse) through the router to three memory
// controllers and behavioural HBM channels (16 words each, so requests
// cross channel boundaries), and checks every returned span base by base
// against the reference model, including zeroed bases above the span.
// Also checks that one- and two-word spans and channel-crossing spans
// occurred.
module tb_ref_router;
  import bancroft_pkg::*;
  import tb_pkg::*;
  localparam int PCW = 4;
  logic clk = 0, rst = 1;
  logic in_valid, in_ready, out_valid, out_ready;
  ref_req_t in_req;
  logic [2:0] mv, mr, sv, sr, hv, hr, hs;
  logic [PCW-1:0] ma [3], ha [3];
  logic [511:0] sd [3], hd [3], out_data;
  logic [8:0] out_nbases;
  int checks = 0, failures = 0, n_two = 0, n_cross = 0, n_one = 0;
  always #5 clk = ~clk;

  ref_router #(.N_PC(3), .PC_WORDS_LOG2(PCW)) dut (.clk, .rst, .in_valid, .in_ready, .in_req,
    .pc_req_valid(mv), .pc_req_ready(mr), .pc_req_addr(ma), .pc_rsp_valid(sv), .pc_rsp_ready(sr), .pc_rsp_data(sd),
    .out_valid, .out_ready, .out_data, .out_nbases);
  for (genvar p = 0; p < 3; p++) begin : g_pc
    ref_memctrl #(.DW(512), .AW(PCW)) u_mc (.clk, .rst, .req_valid(mv[p]), .req_ready(mr[p]), .req_addr(ma[p]),
      .hbm_req_valid(hv[p]), .hbm_req_ready(hr[p]), .hbm_req_addr(ha[p]), .hbm_rsp_valid(hs[p]), .hbm_rsp_data(hd[p]),
      .rsp_valid(sv[p]), .rsp_ready(sr[p]), .rsp_data(sd[p]));
    hbm_model #(.DW(512), .AW(PCW), .KIND(0), .PC_ID(p), .GLOBAL_LOG2(PCW), .LAT(8 + 5 * p)) u_hbm (
      .clk, .rst, .req_valid(hv[p]), .req_ready(hr[p]), .req_addr(ha[p]), .rsp_valid(hs[p]), .rsp_data(hd[p]));
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ref_req_t q [$];
  int n_in = 0;
  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) begin n_in++; q.push_back(in_req); end
    if (out_valid && out_ready) begin
      ref_req_t r;
      logic [511:0] e;
      int nb;
      r = q.pop_front();
      nb = 64 * int'(r.nkmer);
      e = '0;
      for (int i = 0; i < nb; i++)
        e[2*i +: 2] = r.rc ? comp_base(ref_base(r.start + 32'(nb - 1 - i))) : ref_base(r.start + 32'(i));
      checks++;
      if (out_data !== e || out_nbases != 9'(nb)) begin
        failures++; $display("span start %0d n %0d rc %b wrong", r.start, r.nkmer, r.rc);
      end
    end
  end

  initial begin
    in_valid = 0; in_req = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int t = 0; t < 600; t++) begin
      int target, w0, w1;
      in_req.nkmer = 3'(1 + $urandom % 4);
      in_req.start = $urandom % (3 * 16 * 256 - 256);
      if (t % 7 == 0) in_req.start = 32'(16 * 256 * (1 + $urandom % 2) - 10); // straddles two channels
      in_req.rc = 1'($urandom);
      w0 = int'(in_req.start) / 256; w1 = (int'(in_req.start) + 64 * int'(in_req.nkmer) - 1) / 256;
      if (w0 != w1) n_two++; else n_one++;
      if (w0 / 16 != w1 / 16) n_cross++;
      in_valid = 1;
      target = n_in + 1;
      while (n_in < target) begin
        out_ready = ($urandom % 4) != 0;
        @(negedge clk);
      end
    end
    in_valid = 0; out_ready = 1;
    repeat (100) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d spans missing", q.size()); end
    checks++;
    if (n_two == 0 || n_cross == 0 || n_one == 0) begin failures++; $display("cases not covered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
