// tb_decomp_parser: streams randomly generated compressed jobs (verbatim,
// forward, reverse and continuation elements; lengths cut inside the last
// chunk so that its leftover payload must be dropped) into the parser with
// random stalls, rebuilds the decompressed bases from the parser's pieces,
// verbatim words and reference requests using the reference model, and
// compares them with the generator's expected bases. Also checks that
// four-element runs are formed (four verbatims in one push, four k-mers in
// one request) and that a job made only of continuations after one match
// is parsed at one four-k-mer request per cycle.
module tb_decomp_parser;
  import bancroft_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst = 1;
  logic job_start, busy, in_valid, in_ready, ref_valid, ref_ready, verb_valid, verb_ready, piece_valid, piece_ready;
  logic [31:0] job_bases;
  logic [3:0][31:0] in_data, verb_data;
  logic [2:0] in_nwords, verb_n;
  ref_req_t ref_req;
  piece_t piece;
  int checks = 0, failures = 0, n_v4 = 0, n_r4 = 0, n_rc = 0, n_cut = 0;
  bit stall = 1;
  always #5 clk = ~clk;

  decomp_parser dut (.clk, .rst, .job_start, .job_bases, .busy, .in_valid, .in_ready, .in_data, .in_nwords,
    .ref_valid, .ref_ready, .ref_req, .verb_valid, .verb_ready, .verb_data, .verb_n,
    .piece_valid, .piece_ready, .piece);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] exp_b [$];
  logic [31:0] wq [$];
  int n_pieces = 0, n_beats = 0;

  always @(negedge clk) if (!rst) begin
    int n;
    n = (wq.size() < 4) ? wq.size() : 1 + $urandom % 4;
    if (n > wq.size()) n = wq.size();
    in_valid = (n > 0) && (!stall || ($urandom % 4 != 0));
    in_nwords = 3'(n);
    for (int j = 0; j < 4; j++) in_data[j] = (j < n) ? wq[j] : 32'h0;
    ref_ready = !stall || ($urandom % 5 != 0);
    verb_ready = !stall || ($urandom % 5 != 0);
    piece_ready = !stall || ($urandom % 5 != 0);
  end

  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) begin
      n_beats++;
      for (int j = 0; j < int'(in_nwords); j++) void'(wq.pop_front());
    end
    if (piece_valid && piece_ready) begin
      logic [1:0] got [$];
      bit ok;
      n_pieces++;
      got.delete();
      if (piece.from_ref) begin
        int nb;
        if (!ref_valid) begin failures++; $display("piece without request"); end
        nb = 64 * int'(ref_req.nkmer);
        if (ref_req.nkmer == 3'd4) n_r4++;
        if (ref_req.rc) n_rc++;
        for (int i = 0; i < nb; i++)
          got.push_back(ref_req.rc ? comp_base(ref_base(ref_req.start + 32'(nb - 1 - i))) : ref_base(ref_req.start + 32'(i)));
      end else begin
        if (!verb_valid) begin failures++; $display("piece without verbatim words"); end
        if (verb_n == 3'd4) n_v4++;
        for (int j = 0; j < int'(verb_n); j++)
          for (int i = 0; i < 16; i++) got.push_back(verb_data[j][2*i +: 2]);
      end
      ok = (int'(piece.nbases) <= got.size());
      for (int i = 0; i < int'(piece.nbases) && ok; i++) begin
        if (exp_b.size() == 0 || got[i] !== exp_b.pop_front()) ok = 0;
      end
      if (piece.last && int'(piece.nbases) < got.size()) n_cut++;
      checks++;
      if (!ok || (piece.last !== (exp_b.size() == 0))) begin
        failures++; $display("piece %0d wrong (ref %b n %0d last %b) start %0d nk %0d rc %b vn %0d v0 %h got0 %0d", n_pieces, piece.from_ref, piece.nbases, piece.last, ref_req.start, ref_req.nkmer, ref_req.rc, verb_n, verb_data[0], got[0]);
      end
    end
  end

  task automatic run_job(input int nchunks, input int cut, input int wv, input int wf, input int wr);
    int jb;
    gen_job(nchunks, 60000, cut, wv, wf, wr, wq, exp_b, jb);
    @(negedge clk);
    job_start = 1; job_bases = 32'(jb);
    @(negedge clk);
    job_start = 0;
    while (exp_b.size() > 0 || wq.size() > 0) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    job_start = 0; job_bases = 0; in_valid = 0; in_data = '0; in_nwords = 0;
    ref_ready = 1; verb_ready = 1; piece_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int j = 0; j < 10; j++) run_job(1 + $urandom % 6, 120, 40, 15, 15);
    run_job(3, 0, 90, 5, 5);
    // rate: one match followed by continuations only
    stall = 0;
    begin
      int p0, t0;
      p0 = n_pieces;
      t0 = $time;
      run_job(4, 0, 0, 3, 0);   // almost only continuations
      checks++;
      $display("continuation job: %0d pieces in %0d cycles", n_pieces - p0, ($time - t0) / 10);
      if (($time - t0) / 10 > 4 * 6 + 12) begin failures++; $display("continuation runs too slow"); end
    end
    checks++;
    if (n_v4 == 0 || n_r4 == 0 || n_rc == 0 || n_cut == 0) begin
      failures++; $display("coverage: v4 %0d r4 %0d rc %0d cut %0d", n_v4, n_r4, n_rc, n_cut);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
