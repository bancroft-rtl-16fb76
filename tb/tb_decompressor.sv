// tb_decompressor: end-to-end test of one decompressor with a reduced
// reference (16 words per pseudo channel, 3 channels, 12288 bases). Random
// compressed jobs (verbatim, forward, reverse-complement and continuation
// elements, last chunk cut short) are streamed in with random stalls while
// three behavioural HBM channels answer reference reads with random ready
// and fixed latency. Every 512-bit output beat is compared base by base with
// the generator's expected sequence, including out_nbases and out_last on
// the short final beat. A continuation-only job without output stalls
// checks that the output keeps up with about one beat every two cycles.
module tb_decompressor;
  import bancroft_pkg::*;
  import tb_pkg::*;
  localparam int PCW = 4;
  logic clk = 0, rst = 1;
  logic job_start, busy, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [31:0] job_bases;
  logic [3:0][31:0] in_data;
  logic [2:0] in_nwords;
  logic [2:0] hreq_v, hreq_r, hrsp_v;
  logic [PCW-1:0] hreq_a [3];
  logic [BUS_W-1:0] hrsp_d [3], out_data;
  logic [8:0] out_nbases;
  int checks = 0, failures = 0, n_short = 0, n_beats = 0;
  bit stall = 1;
  always #5 clk = ~clk;

  bancroft_decompressor #(.N_PC(3), .PC_WORDS_LOG2(PCW)) dut (
    .clk, .rst, .job_start, .job_bases, .busy, .in_valid, .in_ready, .in_data, .in_nwords,
    .hbm_req_valid(hreq_v), .hbm_req_ready(hreq_r), .hbm_req_addr(hreq_a),
    .hbm_rsp_valid(hrsp_v), .hbm_rsp_data(hrsp_d),
    .out_valid, .out_ready, .out_data, .out_nbases, .out_last);

  for (genvar p = 0; p < 3; p++) begin : g_hbm
    hbm_model #(.DW(BUS_W), .AW(PCW), .KIND(0), .PC_ID(p), .GLOBAL_LOG2(PCW), .LAT(10 + 3 * p)) m (
      .clk, .rst, .req_valid(hreq_v[p]), .req_ready(hreq_r[p]), .req_addr(hreq_a[p]),
      .rsp_valid(hrsp_v[p]), .rsp_data(hrsp_d[p]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] exp_b [$];
  logic [31:0] wq [$];

  always @(negedge clk) if (!rst) begin
    int n;
    n = (wq.size() < 4) ? wq.size() : 1 + $urandom % 4;
    in_valid = (n > 0) && (!stall || ($urandom % 4 != 0));
    in_nwords = 3'(n);
    for (int j = 0; j < 4; j++) in_data[j] = (j < n) ? wq[j] : 32'h0;
    out_ready = !stall || ($urandom % 4 != 0);
  end

  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready)
      for (int j = 0; j < int'(in_nwords); j++) void'(wq.pop_front());
    if (out_valid && out_ready) begin
      int nb, bad;
      bit want_last;
      nb = int'(out_nbases);
      bad = 0;
      n_beats++;
      if (nb > exp_b.size() || nb == 0) begin
        bad = 1;
      end else begin
        for (int i = 0; i < nb; i++) if (out_data[2*i +: 2] !== exp_b.pop_front()) bad++;
      end
      want_last = (exp_b.size() == 0);
      if (!want_last && nb != 256) bad++;
      if (out_last && nb < 256) n_short++;
      checks++;
      if (bad != 0 || out_last !== want_last) begin
        failures++;
        $display("beat %0d wrong: nbases %0d last %b (expected last %b), %0d bad", n_beats, nb, out_last, want_last, bad);
      end
    end
  end

  task automatic run_job(input int nchunks, input int cut, input int wv, input int wf, input int wr);
    int jb;
    gen_job(nchunks, 3 * 16 * 256, cut, wv, wf, wr, wq, exp_b, jb);
    @(negedge clk);
    job_start = 1; job_bases = 32'(jb);
    @(negedge clk);
    job_start = 0;
    while (exp_b.size() > 0 || wq.size() > 0) @(negedge clk);
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    job_start = 0; job_bases = 0; in_valid = 0; in_data = '0; in_nwords = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int j = 0; j < 12; j++) run_job(1 + $urandom % 6, 200, 30, 20, 20);
    run_job(2, 0, 90, 5, 5);
    stall = 0;
    begin
      int b0, t0, cyc;
      b0 = n_beats;
      t0 = $time;
      run_job(4, 0, 0, 3, 0);
      cyc = ($time - t0) / 10;
      checks++;
      $display("continuation job: %0d beats in %0d cycles", n_beats - b0, cyc);
      if (cyc > 2 * (n_beats - b0) + 60) begin failures++; $display("decompressor too slow"); end
    end
    checks++;
    if (n_short == 0) begin failures++; $display("no short final beat seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
