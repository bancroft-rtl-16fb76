// tb_compressor: runs the compressor end to end against eight behavioural
// HBM channels holding a computed filter table. Part 1 streams binary
// strides of two sequences with random output back-pressure and checks
// every record: the stride, kmer_valid, the four Murmur3 hashes of the
// k-mer and of its reverse complement (loop model, seeds 1 and 2) and the
// four filter bits (table nibble == low 4 bits of the k-mer or of its
// reverse complement). Part 2 measures the rate with stall-free memory and
// output: at least one record per two cycles. Part 3 feeds a short FASTA
// text through the ASCII parser and checks its records the same way.
module tb_compressor;
  import bancroft_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst = 1;
  logic bin_mode, seq_start, ascii_valid, ascii_ready, ascii_flush, bin_valid, bin_ready;
  logic [127:0] ascii_data;
  logic [15:0] ascii_keep;
  logic [31:0] bin_stride, n_other;
  logic [7:0] hv, hr, sv;
  logic [22:0] ha [8];
  logic [255:0] sd [8];
  logic out_valid, out_ready;
  cmp_rec_t out_rec;
  int checks = 0, failures = 0, hits = 0;
  bit stall_mem = 1;
  always #5 clk = ~clk;

  bancroft_compressor dut (.clk, .rst, .bin_mode, .seq_start,
    .ascii_data, .ascii_keep, .ascii_valid, .ascii_ready, .ascii_flush,
    .bin_stride, .bin_valid, .bin_ready,
    .hbm_req_valid(hv), .hbm_req_ready(hr), .hbm_req_addr(ha), .hbm_rsp_valid(sv), .hbm_rsp_data(sd),
    .out_valid, .out_ready, .out_rec, .n_other);

  for (genvar p = 0; p < 8; p++) begin : g_hbm
    hbm_model #(.DW(256), .AW(23), .KIND(1), .PC_ID(p), .LAT(10 + 3 * p), .STALL(1'b0)) u (
      .clk, .rst, .req_valid(hv[p]), .req_ready(hr[p]), .req_addr(ha[p]), .rsp_valid(sv[p]), .rsp_data(sd[p]));
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model of the records
  logic [31:0] hist [$];
  cmp_rec_t    expq [$];
  bit          new_seq = 1;

  function automatic cmp_rec_t model(input logic [31:0] s);
    cmp_rec_t r;
    logic [127:0] k, rc;
    logic [31:0] h [4];
    if (new_seq) hist.delete();
    new_seq = 0;
    hist.push_back(s);
    if (hist.size() > 4) void'(hist.pop_front());
    r = '0;
    r.stride = s;
    if (hist.size() == 4) begin
      k = {hist[3], hist[2], hist[1], hist[0]};
      rc = rc64(k);
      h[0] = murmur3_x86_32(k, 16, 32'd1);
      h[1] = murmur3_x86_32(k, 16, 32'd2);
      h[2] = murmur3_x86_32(rc, 16, 32'd1);
      h[3] = murmur3_x86_32(rc, 16, 32'd2);
      r.kmer_valid = 1;
      r.hash0 = h[0]; r.hash1 = h[1]; r.hash2 = h[2]; r.hash3 = h[3];
      for (int l = 0; l < 4; l++)
        r.filt_hit[l] = (filt_nib(int'(h[l] >> 29), h[l] & 32'h1fff_ffff) == ((l < 2) ? k[3:0] : rc[3:0]));
    end
    return r;
  endfunction

  int n_bin = 0, n_out = 0, n_asc = 0;
  always @(posedge clk) if (!rst) begin
    if (bin_valid && bin_ready) begin n_bin++; expq.push_back(model(bin_stride)); end
    if (ascii_valid && ascii_ready) n_asc++;
    if (out_valid && out_ready) begin
      cmp_rec_t e;
      n_out++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected record"); end
      else begin
        e = expq.pop_front();
        if (out_rec !== e) begin failures++; $display("record %0d: got kv%b s%h h%h f%b exp kv%b s%h h%h f%b", n_out, out_rec.kmer_valid, out_rec.stride, out_rec.hash0, out_rec.filt_hit, e.kmer_valid, e.stride, e.hash0, e.filt_hit); end
        hits += $countones(out_rec.filt_hit);
      end
    end
  end

  // ascii strides are modelled as they leave the parser
  always @(posedge clk) if (!rst && !bin_mode && dut.a_valid && dut.a_ready)
    expq.push_back(model(dut.a_stride));

  task automatic send_bin(input int n, input bit rnd_ready);
    for (int i = 0; i < n; i++) begin
      int target;
      bin_valid = 1; bin_stride = $urandom;
      target = n_bin + 1;
      while (n_bin < target) begin
        out_ready = rnd_ready ? (($urandom % 3) != 0) : 1'b1;
        @(negedge clk);
      end
    end
    bin_valid = 0;
  endtask

  initial begin
    int t0, t1, o0;
    bin_mode = 1; seq_start = 0; ascii_valid = 0; ascii_flush = 0; ascii_data = '0; ascii_keep = '0;
    bin_valid = 0; bin_stride = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    // part 1
    send_bin(120, 1);
    seq_start = 1; new_seq = 1; @(negedge clk); seq_start = 0;
    send_bin(80, 1);
    out_ready = 1;
    repeat (100) @(negedge clk);
    // part 2: rate
    seq_start = 1; new_seq = 1; @(negedge clk); seq_start = 0;
    o0 = n_out; t0 = $time;
    send_bin(400, 0);
    while (n_out < o0 + 400) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 2 * 400 + 100) begin failures++; $display("rate: 400 records took %0d cycles", (t1 - t0) / 10); end
    else $display("rate: 400 records in %0d cycles", (t1 - t0) / 10);
    // part 3: ASCII
    bin_mode = 0; seq_start = 1; new_seq = 1; @(negedge clk); seq_start = 0;
    for (int b = 0; b < 12; b++) begin
      int target;
      string line;
      line = (b == 0) ? ">r1 x\n" : "";
      ascii_data = '0; ascii_keep = '0;
      for (int i = 0; i < 16; i++) begin
        byte c;
        if (i < line.len()) c = line[i];
        else case ($urandom % 4) 0: c = "A"; 1: c = "c"; 2: c = "G"; default: c = "t"; endcase
        ascii_data[8*i +: 8] = c; ascii_keep[i] = 1'b1;
      end
      ascii_valid = 1;
      target = n_asc + 1;
      while (n_asc < target) @(negedge clk);
    end
    ascii_valid = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d records missing", expq.size()); end
    checks++;
    if (hits == 0) begin failures++; $display("no filter hit seen"); end
    $display("records %0d, filter hits %0d", n_out, hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
