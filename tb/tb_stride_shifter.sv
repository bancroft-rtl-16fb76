// tb_stride_shifter: streams random strides over several sequences with
// random back-pressure and checks every output: the new stride, the k-mer
// (the last four strides of the sequence, oldest in the low bits) and that
// kmer_valid is set only once four strides of the sequence have entered.
module tb_stride_shifter;
  logic clk = 0, rst = 1;
  logic [31:0] in_stride, out_stride;
  logic in_first, in_valid, in_ready, out_valid, out_ready, out_kv;
  logic [127:0] out_kmer;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  stride_shifter dut (.clk, .rst, .in_stride, .in_first, .in_valid, .in_ready,
                      .out_kmer, .out_stride, .out_kmer_valid(out_kv), .out_valid, .out_ready);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected outputs
  logic [31:0]  e_stride [$];
  logic [127:0] e_kmer [$];
  logic         e_kv [$];
  logic [31:0]  hist [$];

  int n_in = 0;
  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) begin
      n_in++;
      if (in_first) hist.delete();
      hist.push_back(in_stride);
      if (hist.size() > 4) void'(hist.pop_front());
      e_stride.push_back(in_stride);
      e_kv.push_back(hist.size() == 4);
      e_kmer.push_back(hist.size() == 4 ? {hist[3], hist[2], hist[1], hist[0]} : 128'h0);
    end
    if (out_valid && out_ready) begin
      logic [31:0] s; logic [127:0] k; logic v;
      s = e_stride.pop_front(); k = e_kmer.pop_front(); v = e_kv.pop_front();
      checks++;
      if (out_stride !== s || out_kv !== v || (v && out_kmer !== k)) begin
        failures++;
        $display("mismatch stride %h/%h kv %b/%b kmer %h/%h", out_stride, s, out_kv, v, out_kmer, k);
      end
    end
  end

  initial begin
    in_valid = 0; in_first = 0; in_stride = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int seq = 0; seq < 20; seq++) begin
      int n;
      n = 2 + $urandom % 20;
      for (int i = 0; i < n; i++) begin
        int target;
        in_valid = 1; in_first = (i == 0); in_stride = $urandom;
        target = n_in + 1;
        while (n_in < target) begin
          out_ready = ($urandom % 3) != 0;
          @(negedge clk);
        end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (e_stride.size() != 0) begin failures++; $display("outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
