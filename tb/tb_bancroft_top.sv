// tb_bancroft_top: end-to-end test of the full-size accelerator (no
// parameter overrides: three decompressors on 3 x 4M-word reference
// channels, one compressor on eight filter-table channels, SHD filter with
// E = 5). Seventeen behavioural HBM channels serve computed contents with
// random ready and fixed latency.
// Decompression/filter part: for every pair a random compressed read is
// generated; decompressor 1 gets a copy with a few substituted bases and
// decompressor 2 a copy with more edits (substitutions and match offsets
// moved by one base, i.e. shifted segments). All three streams have the
// same length. Every 256-base beat leaving each decompressor is compared
// with a software decompression of its stream, and each filter lane's
// result with the filter model, under all amendment settings.
// Compressor part, running at the same time: binary strides and a FASTA
// text with a header line, every record checked against a Murmur3 and
// filter-table model, with random output back-pressure.
// Each mechanism below is counted, and the test fails if one never
// happened: four-verbatim runs, four-k-mer reference runs, continuations,
// reverse-complement reads, two-word reference reads, short final beats,
// multi-window pairs, accepted and rejected pairs, amendment changing a
// result, every decompressor channel used, filter hits, records without a
// full k-mer, FASTA headers skipped, router conflicts and output stalls.
module tb_bancroft_top;
  import bancroft_pkg::*;
  import tb_pkg::*;
  localparam int ND = 3, DPC = 3, PCW = 22, NCPC = 8;
  localparam longint RLIM = longint'(ND) << (PCW + 8);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ND-1:0] job_start, dec_busy, dec_in_valid, dec_in_ready;
  logic [31:0] job_bases [ND];
  logic [3:0][31:0] dec_in_data [ND];
  logic [2:0] dec_in_nwords [ND];
  logic [ND*DPC-1:0] dv, dr, dsv;
  logic [PCW-1:0] da [ND*DPC];
  logic [BUS_W-1:0] dsd [ND*DPC];
  logic [1:0] amend;
  logic [ND-2:0] res_valid, res_accept;
  logic [2:0] res_dist [ND-1];
  logic cmp_bin_mode, cmp_seq_start, cmp_ascii_valid, cmp_ascii_ready, cmp_ascii_flush;
  logic cmp_bin_valid, cmp_bin_ready, cmp_out_valid, cmp_out_ready;
  logic [127:0] cmp_ascii_data;
  logic [15:0] cmp_ascii_keep;
  logic [31:0] cmp_bin_stride, cmp_n_other;
  logic [NCPC-1:0] cv, cr, csv;
  logic [22:0] ca [NCPC];
  logic [255:0] csd [NCPC];
  cmp_rec_t cmp_out_rec;

  bancroft_top dut (
    .clk, .rst, .job_start, .job_bases, .dec_busy, .dec_in_valid, .dec_in_ready,
    .dec_in_data, .dec_in_nwords,
    .dhbm_req_valid(dv), .dhbm_req_ready(dr), .dhbm_req_addr(da), .dhbm_rsp_valid(dsv), .dhbm_rsp_data(dsd),
    .amend, .res_valid, .res_dist, .res_accept,
    .cmp_bin_mode, .cmp_seq_start, .cmp_ascii_data, .cmp_ascii_keep, .cmp_ascii_valid,
    .cmp_ascii_ready, .cmp_ascii_flush, .cmp_bin_stride, .cmp_bin_valid, .cmp_bin_ready,
    .chbm_req_valid(cv), .chbm_req_ready(cr), .chbm_req_addr(ca), .chbm_rsp_valid(csv), .chbm_rsp_data(csd),
    .cmp_out_valid, .cmp_out_ready, .cmp_out_rec, .cmp_n_other);

  for (genvar i = 0; i < ND * DPC; i++) begin : g_dh
    hbm_model #(.DW(BUS_W), .AW(PCW), .KIND(0), .PC_ID(i % DPC), .GLOBAL_LOG2(PCW), .LAT(12 + 2 * i)) m (
      .clk, .rst, .req_valid(dv[i]), .req_ready(dr[i]), .req_addr(da[i]), .rsp_valid(dsv[i]), .rsp_data(dsd[i]));
  end
  for (genvar i = 0; i < NCPC; i++) begin : g_ch
    hbm_model #(.DW(256), .AW(23), .KIND(1), .PC_ID(i), .LAT(10 + 3 * i)) m (
      .clk, .rst, .req_valid(cv[i]), .req_ready(cr[i]), .req_addr(ca[i]), .rsp_valid(csv[i]), .rsp_data(csd[i]));
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int m_verb4 = 0, m_ref4 = 0, m_cont = 0, m_rc = 0, m_two = 0, m_short = 0, m_multi = 0;
  int m_acc = 0, m_rej = 0, m_amend = 0, m_hit = 0, m_kv0 = 0, m_hdr = 0, m_conflict = 0, m_stall = 0;

  `define DEC_PROBE(D)                                                                   \
  always @(posedge clk) if (!rst) begin                                                  \
    if (dut.g_dec[D].u_dec.vv_valid && dut.g_dec[D].u_dec.vv_ready && dut.g_dec[D].u_dec.vv_n == 3'd4) m_verb4++; \
    if (dut.g_dec[D].u_dec.rq_valid && dut.g_dec[D].u_dec.rq_ready) begin                \
      if (dut.g_dec[D].u_dec.rq.nkmer == 3'd4) m_ref4++;                                 \
      if (dut.g_dec[D].u_dec.rq.rc) m_rc++;                                              \
    end                                                                                  \
    if (dut.g_dec[D].u_dec.u_router.issue && dut.g_dec[D].u_dec.u_router.two_words &&    \
        !dut.g_dec[D].u_dec.u_router.second_q) m_two++;                                  \
  end
  `DEC_PROBE(0)
  `DEC_PROBE(1)
  `DEC_PROBE(2)

  always @(posedge clk) if (!rst) begin
    if (dut.u_cmp.u_router.pend_q != '0 && dut.u_cmp.u_router.pend_next != '0) m_conflict++;
    if (cmp_out_valid && !cmp_out_ready) m_stall++;
  end

  // ---------------- decompressor streams and beat check ----------------
  logic [31:0] wq [ND][$];
  logic [1:0]  eb [ND][$];

  for (genvar d = 0; d < ND; d++) begin : g_drv
    always @(negedge clk) if (!rst) begin
      int n;
      n = (wq[d].size() < 4) ? wq[d].size() : 1 + $urandom % 4;
      dec_in_valid[d] = (n > 0) && ($urandom % 4 != 0);
      dec_in_nwords[d] = 3'(n);
      for (int j = 0; j < 4; j++) dec_in_data[d][j] = (j < n) ? wq[d][j] : 32'h0;
    end
    always @(posedge clk) if (!rst) begin
      if (dec_in_valid[d] && dec_in_ready[d])
        for (int j = 0; j < int'(dec_in_nwords[d]); j++) void'(wq[d].pop_front());
      if (dut.fire) begin
        int nb, bad;
        nb = int'(dut.d_nb[d]);
        bad = 0;
        if (nb > eb[d].size() || nb == 0) bad = 1;
        else for (int i = 0; i < nb; i++) if (dut.d_data[d][2*i +: 2] !== eb[d].pop_front()) bad++;
        if (dut.d_last[d] !== (eb[d].size() == 0)) bad++;
        if (d == 0 && dut.d_last[d] && nb < 256) m_short++;
        checks++;
        if (bad != 0) begin failures++; $display("decompressor %0d: wrong beat (%0d bases, %0d errors)", d, nb, bad); end
      end
    end
  end

  // ---------------- filter results ----------------
  int expd [ND-1][$];
  for (genvar r = 0; r < ND - 1; r++) begin : g_res
    always @(posedge clk) if (!rst && res_valid[r]) begin
      int e;
      checks++;
      if (expd[r].size() == 0) begin failures++; $display("lane %0d: unexpected result", r); end
      else begin
        e = expd[r].pop_front();
        if (int'(res_dist[r]) != e || res_accept[r] !== (e <= 5)) begin
          failures++; $display("lane %0d: dist %0d accept %b, expected %0d", r, res_dist[r], res_accept[r], e);
        end
        if (res_accept[r]) m_acc++; else m_rej++;
      end
    end
  end

  // copy of a job with nsub substituted bases in verbatim words and nshift
  // match offsets moved by one base (down for forward, up for reverse
  // matches, so continuations stay inside the reference)
  function automatic void edit_job(input logic [31:0] src [$], input int nsub, input int nshift,
                                   ref logic [31:0] dst [$]);
    int verb [$], fwd [$], rev [$];
    int p;
    dst = src;
    p = 0;
    while (p < src.size()) begin
      logic [31:0] hdr;
      hdr = src[p++];
      for (int e = 0; e < 16; e++) begin
        case (hdr[2*e +: 2])
          2'b00: verb.push_back(p++);
          2'b01: fwd.push_back(p++);
          2'b10: rev.push_back(p++);
          default: ;
        endcase
      end
    end
    for (int k = 0; k < nsub && verb.size() > 0; k++) begin
      int w, b;
      w = verb[$urandom % verb.size()];
      b = $urandom % 16;
      dst[w][2*b +: 2] = dst[w][2*b +: 2] ^ 2'(1 + $urandom % 3);
    end
    for (int k = 0; k < nshift; k++) begin
      if (fwd.size() > 0 && ($urandom % 2 == 0 || rev.size() == 0)) dst[fwd[$urandom % fwd.size()]] -= 1;
      else if (rev.size() > 0) dst[rev[$urandom % rev.size()]] += 1;
    end
  endfunction

  task automatic run_pair(input int nchunks, input int am);
    logic [31:0] w [ND][$];
    logic [1:0] b [ND][$];
    logic [1:0] junk [$];
    int jb, nc;
    gen_job(nchunks, RLIM, 200, 35, 25, 20, w[0], junk, jb);
    edit_job(w[0], $urandom % 3, 0, w[1]);
    edit_job(w[0], (nchunks % 2) ? $urandom % 4 : 6 + $urandom % 12, $urandom % 3, w[2]);
    for (int d = 0; d < ND; d++) begin
      decode_job(w[d], jb, b[d], nc);
      if (d == 0) m_cont += nc;
    end
    checks++;
    if (b[0] != junk) begin failures++; $display("software decompression disagrees with the generator"); end
    if (jb > 256) m_multi++;
    if (amend != 2'(am)) begin
      repeat (2) @(negedge clk);
      amend = 2'(am);
    end
    for (int r = 1; r < ND; r++) begin
      int e;
      e = shd_model(5, 256, am, b[0], b[r]);
      if (e != shd_model(5, 256, 0, b[0], b[r])) m_amend++;
      expd[r-1].push_back(e);
    end
    for (int d = 0; d < ND; d++) begin
      eb[d] = b[d];
      wq[d] = w[d];
      job_bases[d] = 32'(jb);
    end
    job_start = '1;
    @(negedge clk);
    job_start = '0;
    while (expd[0].size() + expd[1].size() > 0) @(negedge clk);
  endtask

  // ---------------- compressor ----------------
  logic [31:0] hist [$];
  cmp_rec_t    expq [$];
  bit          new_seq = 1;
  int          n_bin = 0, n_asc = 0, n_rec = 0;

  function automatic cmp_rec_t cmp_model(input logic [31:0] s);
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

  always @(posedge clk) if (!rst) begin
    if (cmp_bin_mode && cmp_bin_valid && cmp_bin_ready) begin n_bin++; expq.push_back(cmp_model(cmp_bin_stride)); end
    if (!cmp_bin_mode && dut.u_cmp.a_valid && dut.u_cmp.a_ready) expq.push_back(cmp_model(dut.u_cmp.a_stride));
    if (cmp_ascii_valid && cmp_ascii_ready) n_asc++;
    if (cmp_out_valid && cmp_out_ready) begin
      n_rec++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected compressor record"); end
      else begin
        cmp_rec_t e;
        e = expq.pop_front();
        if (cmp_out_rec !== e) begin failures++; $display("compressor record %0d wrong", n_rec); end
        if (cmp_out_rec.filt_hit != '0) m_hit++;
        if (!cmp_out_rec.kmer_valid) m_kv0++;
      end
    end
  end

  always @(negedge clk) cmp_out_ready = ($urandom % 3) != 0;

  task automatic cmp_new_seq();
    cmp_seq_start = 1; new_seq = 1;
    @(negedge clk);
    cmp_seq_start = 0;
  endtask

  task automatic cmp_traffic();
    for (int s = 0; s < 4; s++) begin
      cmp_new_seq();
      for (int i = 0; i < 60; i++) begin
        int target;
        cmp_bin_valid = 1; cmp_bin_stride = $urandom;
        target = n_bin + 1;
        while (n_bin < target) @(negedge clk);
      end
      cmp_bin_valid = 0;
    end
    cmp_bin_mode = 0;
    for (int s = 0; s < 2; s++) begin
      cmp_new_seq();
      for (int beat = 0; beat < 10; beat++) begin
        int target;
        string line;
        line = (beat == 0) ? ">chr sample\n" : "";
        if (beat == 0) m_hdr++;
        cmp_ascii_data = '0; cmp_ascii_keep = '0;
        for (int i = 0; i < 16; i++) begin
          byte c;
          if (i < line.len()) c = line[i];
          else case ($urandom % 4) 0: c = "A"; 1: c = "c"; 2: c = "G"; default: c = "t"; endcase
          cmp_ascii_data[8*i +: 8] = c; cmp_ascii_keep[i] = 1'b1;
        end
        cmp_ascii_valid = 1;
        target = n_asc + 1;
        while (n_asc < target) @(negedge clk);
      end
      cmp_ascii_valid = 0;
      repeat (20) @(negedge clk);
    end
    while (expq.size() > 0) @(negedge clk);
  endtask

  // ---------------- main ----------------
  initial begin
    job_start = '0; amend = 2'b00;
    for (int d = 0; d < ND; d++) begin
      job_bases[d] = 0; dec_in_valid[d] = 0; dec_in_data[d] = '0; dec_in_nwords[d] = 0;
    end
    cmp_bin_mode = 1; cmp_seq_start = 0; cmp_ascii_valid = 0; cmp_ascii_flush = 0;
    cmp_ascii_data = '0; cmp_ascii_keep = '0; cmp_bin_valid = 0; cmp_bin_stride = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    fork
      for (int t = 0; t < 24; t++) run_pair(1 + $urandom % 5, t % 4);
      cmp_traffic();
    join
    repeat (20) @(negedge clk);
    checks++;
    if (wq[0].size() + wq[1].size() + wq[2].size() + eb[0].size() + eb[1].size() + eb[2].size() != 0) begin
      failures++; $display("decompressor data left over");
    end
    begin
      int unused_pc;
      unused_pc = 0;
      if (g_dh[0].m.reads == 0 || g_dh[1].m.reads == 0 || g_dh[2].m.reads == 0 ||
          g_dh[3].m.reads == 0 || g_dh[4].m.reads == 0 || g_dh[5].m.reads == 0 ||
          g_dh[6].m.reads == 0 || g_dh[7].m.reads == 0 || g_dh[8].m.reads == 0) unused_pc = 1;
      $display("mechanisms: verb4 %0d ref4 %0d cont %0d rc %0d two-word %0d short %0d multi %0d accept %0d reject %0d amend %0d",
               m_verb4, m_ref4, m_cont, m_rc, m_two, m_short, m_multi, m_acc, m_rej, m_amend);
      $display("compressor: records %0d hits %0d no-kmer %0d headers %0d conflicts %0d stalls %0d",
               n_rec, m_hit, m_kv0, m_hdr, m_conflict, m_stall);
      checks++;
      if (unused_pc) begin failures++; $display("a decompressor channel was never read"); end
      checks++;
      if (m_verb4 == 0 || m_ref4 == 0 || m_cont == 0 || m_rc == 0 || m_two == 0 || m_short == 0 ||
          m_multi == 0 || m_acc == 0 || m_rej == 0 || m_amend == 0 || m_hit == 0 || m_kv0 == 0 ||
          m_hdr == 0 || m_conflict == 0 || m_stall == 0) begin
        failures++; $display("a mechanism never happened");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
