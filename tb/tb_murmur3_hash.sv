// tb_murmur3_hash: checks the pipelined Murmur3 against a loop model and two
// fixed 16-byte vectors (bytes 00..0f, seeds 1 and 2), a new key every cycle
// with a gap pattern and a stall, and that the latency is 6 cycles.
module tb_murmur3_hash;
  import tb_pkg::*;
  logic clk = 0, rst = 1, en = 1;
  logic [127:0] key;
  logic in_valid;
  logic [31:0] h1, h2;
  logic v1, v2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  murmur3_hash #(.SEED(32'h1)) u1 (.clk, .rst, .en, .in_key(key), .in_valid, .out_hash(h1), .out_valid(v1));
  murmur3_hash #(.SEED(32'h2)) u2 (.clk, .rst, .en, .in_key(key), .in_valid, .out_hash(h2), .out_valid(v2));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] q_key [$];
  int cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) begin
    cyc++;
    if (!rst && en && in_valid) begin q_key.push_back(key); if (first_in < 0) first_in = cyc; end
    if (!rst && v1 && en) begin
      logic [127:0] k;
      if (first_out < 0) first_out = cyc;
      k = q_key.pop_front();
      checks++;
      if (h1 !== murmur3_x86_32(k, 16, 32'h1) || h2 !== murmur3_x86_32(k, 16, 32'h2) || !v2) begin
        failures++;
        $display("hash mismatch key=%h got %h/%h exp %h/%h", k, h1, h2,
                 murmur3_x86_32(k, 16, 32'h1), murmur3_x86_32(k, 16, 32'h2));
      end
    end
  end

  initial begin
    in_valid = 0; key = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    for (int i = 0; i < 16; i++) key[8*i +: 8] = 8'(i);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (h1 !== 32'hbba77653 || h2 !== 32'h47864ac9) begin
      failures++; $display("fixed vector: got %h %h", h1, h2);
    end
    checks++;
    if (first_out - first_in != 6) begin failures++; $display("latency %0d", first_out - first_in); end
    for (int t = 0; t < 300; t++) begin
      key = {$urandom, $urandom, $urandom, $urandom};
      in_valid = ($urandom % 4) != 0;
      en = (t % 37) != 5;
      @(negedge clk);
    end
    in_valid = 0; en = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (q_key.size() != 0) begin failures++; $display("%0d hashes missing", q_key.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
