// tb_shuffler: feeds random sequences of verbatim pieces (16..64 bases) and
// reference pieces (64..256 bases) with random data, a short last piece per
// job, and random stalls on every input and on the output; checks that the
// output is the concatenation of the pieces in order, in full 256-base beats
// with a short, flagged last beat, and that an uninterrupted stream of
// 256-base pieces leaves at one beat per cycle.
module tb_shuffler;
  import bancroft_pkg::*;
  logic clk = 0, rst = 1;
  logic piece_valid, piece_ready, verb_valid, verb_ready, ref_valid, ref_ready, out_valid, out_ready, out_last;
  piece_t piece;
  logic [3:0][31:0] verb_data;
  logic [511:0] ref_data, out_data;
  logic [8:0] out_nbases;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shuffler dut (.clk, .rst, .piece_valid, .piece_ready, .piece, .verb_valid, .verb_ready, .verb_data,
    .ref_valid, .ref_ready, .ref_data, .out_valid, .out_ready, .out_data, .out_nbases, .out_last);

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] exp_b [$];
  bit exp_last [$];     // per base: is the last base of its job
  piece_t   pq [$];
  logic [127:0] vq [$];
  logic [511:0] rq [$];
  int beats = 0, beat_cycles = 0;
  bit fast = 0;

  // drivers for the three inputs
  always @(negedge clk) if (!rst) begin
    piece_valid = (pq.size() > 0) && ($urandom % 5 != 0 || fast);
    if (pq.size() > 0) piece = pq[0];
    verb_valid = (vq.size() > 0) && ($urandom % 5 != 0 || fast);
    if (vq.size() > 0) verb_data = vq[0];
    ref_valid = (rq.size() > 0) && ($urandom % 5 != 0 || fast);
    if (rq.size() > 0) ref_data = rq[0];
    out_ready = fast || ($urandom % 4 != 0);
  end

  always @(posedge clk) if (!rst) begin
    if (piece_valid && piece_ready) void'(pq.pop_front());
    if (verb_valid && verb_ready) void'(vq.pop_front());
    if (ref_valid && ref_ready) void'(rq.pop_front());
    if (out_valid && out_ready) begin
      bit ok, lst;
      ok = 1; lst = 0;
      beats++;
      for (int i = 0; i < int'(out_nbases); i++) begin
        if (exp_b.size() == 0) begin ok = 0; break; end
        if (out_data[2*i +: 2] !== exp_b.pop_front()) ok = 0;
        lst = exp_last.pop_front();
      end
      checks++;
      if (!ok || (lst !== out_last) || (!out_last && out_nbases != 9'd256)) begin
        failures++; $display("beat %0d wrong (nbases %0d last %b/%b)", beats, out_nbases, out_last, lst);
      end
    end
  end

  task automatic add_piece(input bit from_ref, input int nb, input bit last);
    piece_t p;
    p.from_ref = from_ref; p.nbases = 9'(nb); p.last = last;
    pq.push_back(p);
    if (from_ref) begin
      logic [511:0] d;
      for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom;
      rq.push_back(d);
      for (int i = 0; i < nb; i++) begin exp_b.push_back(d[2*i +: 2]); exp_last.push_back(last && i == nb - 1); end
    end else begin
      logic [127:0] d;
      d = {$urandom, $urandom, $urandom, $urandom};
      vq.push_back(d);
      for (int i = 0; i < nb; i++) begin exp_b.push_back(d[2*i +: 2]); exp_last.push_back(last && i == nb - 1); end
    end
  endtask

  initial begin
    int c0;
    piece_valid = 0; verb_valid = 0; ref_valid = 0; out_ready = 1; piece = '0; verb_data = '0; ref_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int job = 0; job < 12; job++) begin
      int np;
      np = 5 + $urandom % 40;
      for (int k = 0; k < np; k++) begin
        bit last, r;
        int nb;
        last = (k == np - 1);
        r = $urandom % 2;
        nb = r ? 64 * (1 + $urandom % 4) : 16 * (1 + $urandom % 4);
        if (last) nb = 1 + $urandom % nb;
        add_piece(r, nb, last);
      end
    end
    while (exp_b.size() > 0) @(negedge clk);
    // rate: 64 pieces of 256 bases, nothing stalls
    repeat (10) @(negedge clk);
    fast = 1;
    for (int k = 0; k < 64; k++) add_piece(1, 256, k == 63);
    c0 = beats;
    begin
      int t0;
      t0 = $time;
      while (exp_b.size() > 0) @(negedge clk);
      checks++;
      if (($time - t0) / 10 > 64 + 6) begin failures++; $display("64 beats took %0d cycles", ($time - t0) / 10); end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (pq.size() != 0 || vq.size() != 0 || rq.size() != 0) begin failures++; $display("inputs left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
