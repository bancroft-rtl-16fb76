// tb_filter_router: offers k-mers with four random hashes (some forced onto
// the same channel) to the router, with random readiness on the 8 channel
// ports, and checks that each lookup of a valid k-mer reaches the channel
// given by its top three hash bits exactly once with the right index,
// nibble, tag and lane, that k-mers without a window make no lookup, and
// that four lookups on four different channels leave in a single cycle.
module tb_filter_router;
  import bancroft_pkg::*;
  logic clk = 0, rst = 1;
  logic in_valid, in_ready, in_kv;
  logic [3:0][31:0] in_hash;
  logic [3:0][3:0]  in_nib;
  logic [CTAG_W-1:0] in_tag;
  logic [7:0] req_valid, req_ready;
  flt_req_t req [8];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  filter_router #(.N_PC(8)) dut (.clk, .rst, .in_valid, .in_ready, .in_hash, .in_nib, .in_tag,
    .in_kmer_valid(in_kv), .req_valid, .req_ready, .req);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected lookups: key = {tag, lane}
  int exp_pc [int];
  logic [31:0] exp_idx [int];
  logic [3:0]  exp_nib [int];
  int n_in = 0, sent = 0;
  int fast_cycles = 0;

  always @(posedge clk) if (!rst) begin
    int granted;
    granted = 0;
    if (in_valid && in_ready) begin
      n_in++;
      if (in_kv)
        for (int l = 0; l < 4; l++) begin
          exp_pc[{in_tag, 2'(l)}]  = int'(in_hash[l][31:29]);
          exp_idx[{in_tag, 2'(l)}] = {3'b000, in_hash[l][28:0]};
          exp_nib[{in_tag, 2'(l)}] = in_nib[l];
        end
    end
    for (int p = 0; p < 8; p++) if (req_valid[p] && req_ready[p]) begin
      int key;
      key = {req[p].tag, req[p].lane};
      granted++;
      checks++;
      if (!exp_pc.exists(key)) begin
        failures++; $display("unexpected lookup tag %0d lane %0d", req[p].tag, req[p].lane);
      end else begin
        if (exp_pc[key] != p || exp_idx[key] !== req[p].idx || exp_nib[key] !== req[p].nib) begin
          failures++; $display("lookup tag %0d lane %0d on pc %0d (exp %0d) idx %h/%h", req[p].tag, req[p].lane, p, exp_pc[key], req[p].idx, exp_idx[key]);
        end
        exp_pc.delete(key);
      end
    end
    if (granted == 4) fast_cycles++;
  end

  initial begin
    in_valid = 0; in_kv = 0; in_hash = '0; in_nib = '0; in_tag = '0; req_ready = '1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    // four lookups on four different channels with all channels ready
    in_valid = 1; in_kv = 1; in_tag = CTAG_W'(15);
    for (int l = 0; l < 4; l++) begin in_hash[l] = {3'(2*l), 29'($urandom)}; in_nib[l] = 4'($urandom); end
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int target;
      in_valid = 1;
      in_tag = CTAG_W'(t);
      in_kv = ($urandom % 8) != 0;
      for (int l = 0; l < 4; l++) begin
        in_hash[l] = $urandom;
        if (t % 5 == 0) in_hash[l][31:29] = 3'd3;   // all four on one channel
        in_nib[l] = 4'($urandom);
      end
      target = n_in + 1;
      while (n_in < target) begin
        req_ready = 8'($urandom);
        @(negedge clk);
      end
    end
    in_valid = 0; req_ready = '1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_pc.size() != 0) begin failures++; $display("%0d lookups never sent", exp_pc.size()); end
    checks++;
    if (fast_cycles == 0) begin failures++; $display("four lookups never left in one cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
