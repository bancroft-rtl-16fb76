// tb_outbound_encoder: allocates strides, delivers their hashes later and
// their four filter results in random order over random channel ports, with
// random back-pressure on the output, and checks that records leave in
// stride order with the right stride, hashes and filter bits, that k-mers
// without a window leave without waiting for lookups, and that allocation
// stops when all 64 entries are in flight.
module tb_outbound_encoder;
  import bancroft_pkg::*;
  logic clk = 0, rst = 1;
  logic alloc_valid, alloc_ready, alloc_kv;
  logic [CTAG_W-1:0] alloc_tag;
  logic [31:0] alloc_stride;
  logic hash_valid;
  logic [CTAG_W-1:0] hash_tag;
  logic [3:0][31:0] hash_val;
  logic [7:0] rsp_valid;
  flt_rsp_t rsp [8];
  logic out_valid, out_ready;
  cmp_rec_t out_rec;
  int checks = 0, failures = 0, full_seen = 0;
  always #5 clk = ~clk;

  outbound_encoder #(.N_PC(8)) dut (.clk, .rst, .alloc_valid, .alloc_ready, .alloc_tag, .alloc_stride,
    .alloc_kmer_valid(alloc_kv), .hash_valid, .hash_tag, .hash_val, .rsp_valid, .rsp, .out_valid, .out_ready, .out_rec);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cmp_rec_t exp_q [$];       // expected records in order
  int unhashed [$];          // tags waiting for hashes
  cmp_rec_t by_tag [64];
  int pend [$];              // {tag,lane} waiting for a response
  int order [$];             // tags in allocation order
  int n_sent = 0;

  initial begin
    alloc_valid = 0; alloc_kv = 0; alloc_stride = 0; hash_valid = 0; hash_tag = 0; hash_val = '0;
    rsp_valid = '0; out_ready = 0;
    for (int p = 0; p < 8; p++) rsp[p] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // decide this cycle's inputs (at negedge)
      alloc_valid = (cyc < 2500) && ($urandom % 3 != 0);
      alloc_kv = ($urandom % 6) != 0;
      alloc_stride = $urandom;
      hash_valid = 0;
      if (unhashed.size() > 0 && ($urandom % 2)) begin
        hash_valid = 1;
        hash_tag = CTAG_W'(unhashed[0]);
        for (int l = 0; l < 4; l++) hash_val[l] = $urandom;
      end
      rsp_valid = '0;
      for (int p = 0; p < 8; p++) begin
        if (pend.size() > 0 && ($urandom % 3 == 0)) begin
          int k, key;
          k = $urandom % pend.size();
          key = pend[k];
          pend.delete(k);
          rsp_valid[p] = 1;
          rsp[p].tag = CTAG_W'(key >> 2);
          rsp[p].lane = 2'(key);
          rsp[p].hit = 1'($urandom);
          by_tag[key >> 2].filt_hit[key & 3] = rsp[p].hit;
        end
      end
      out_ready = ($urandom % 4) != 0;
      @(posedge clk);
      // observe the edge
      if (!alloc_ready) full_seen++;
      if (alloc_valid && alloc_ready) begin
        cmp_rec_t r;
        r = '0;
        r.stride = alloc_stride;
        r.kmer_valid = alloc_kv;
        by_tag[alloc_tag] = r;
        unhashed.push_back(int'(alloc_tag));
        order.push_back(int'(alloc_tag));
      end
      if (hash_valid) begin
        int t;
        t = unhashed.pop_front();
        if (by_tag[t].kmer_valid) begin
          by_tag[t].hash0 = hash_val[0]; by_tag[t].hash1 = hash_val[1];
          by_tag[t].hash2 = hash_val[2]; by_tag[t].hash3 = hash_val[3];
        end
        if (by_tag[t].kmer_valid) for (int l = 0; l < 4; l++) pend.push_back(t * 4 + l);
        exp_q.push_back('0); // placeholder, filled when sent
      end
      if (out_valid && out_ready) begin
        cmp_rec_t e;
        int t;
        t = order.pop_front();
        e = by_tag[t];
        n_sent++;
        checks++;
        if (out_rec !== e) begin failures++; $display("record tag %0d got %p exp %p", t, out_rec, e); end
        void'(exp_q.pop_front());
      end
      @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0 || unhashed.size() != 0) begin failures++; $display("%0d records left", exp_q.size()); end
    checks++;
    if (n_sent < 1000 || order.size() != 0) begin failures++; $display("only %0d records sent, %0d missing", n_sent, order.size()); end
    checks++;
    if (full_seen == 0) begin failures++; $display("buffer never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
