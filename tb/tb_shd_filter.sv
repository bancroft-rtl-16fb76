// tb_shd_filter: checks the Shifted-Hamming-Distance filter.
// 1. The worked example (read ACGAGACGT against reference ACAAGAGTG, E = 1)
//    must give an estimated distance of 2, with and without amendment.
// 2. Random read/reference pairs of 1 to 3 windows, the reference made from
//    the read by a few substitutions, insertions and deletions, are fed to a
//    small instance (E = 2, 16-base windows) and to the full-size instance
//    (E = 5, 256-base windows) with all four amendment settings. Results
//    are compared with a reference model that works on the whole pair:
//    masks over global positions, amendment and count per window, counts
//    saturated at 7. Pairs follow each other back to back or with gaps.
module tb_shd_filter;
  import bancroft_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_acc = 0, n_rej = 0, n_amend_diff = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  // one filter instance with its own driver and scoreboard
  `define SHD_LANE(NAME, EE, NBB)                                                        \
  logic [1:0] NAME``_amend;                                                              \
  logic NAME``_iv, NAME``_il, NAME``_rv, NAME``_ra;                                      \
  logic [2*NBB-1:0] NAME``_ird, NAME``_irf;                                              \
  logic [$clog2(NBB):0] NAME``_inb;                                                      \
  logic [2:0] NAME``_rd;                                                                 \
  int NAME``_exp [$];                                                                   \
  shd_filter #(.E(EE), .NB(NBB)) NAME (.clk, .rst, .amend(NAME``_amend),                 \
    .in_valid(NAME``_iv), .in_read(NAME``_ird), .in_ref(NAME``_irf),                     \
    .in_nbases(NAME``_inb), .in_last(NAME``_il),                                         \
    .res_valid(NAME``_rv), .res_dist(NAME``_rd), .res_accept(NAME``_ra));                \
  always @(posedge clk) if (!rst && NAME``_rv) begin                                     \
    int e;                                                                               \
    checks++;                                                                            \
    if (NAME``_exp.size() == 0) begin failures++; $display(`"NAME: unexpected result`"); end \
    else begin                                                                           \
      e = NAME``_exp.pop_front();                                                        \
      if (int'(NAME``_rd) != e || NAME``_ra !== (e <= EE)) begin                         \
        failures++; $display(`"NAME: dist %0d accept %b, expected %0d`", NAME``_rd, NAME``_ra, e); \
      end                                                                                \
      if (NAME``_ra) n_acc++; else n_rej++;                                              \
    end                                                                                  \
  end                                                                                    \
  task automatic NAME``_pair(input logic [1:0] rd [$], input logic [1:0] rf [$], input int am, input bit gaps); \
    int L;                                                                               \
    L = rd.size();                                                                       \
    if (NAME``_amend != 2'(am)) begin  /* amend is static: change it between pairs */    \
      repeat (2) @(negedge clk);                                                         \
      NAME``_amend = 2'(am);                                                             \
    end                                                                                  \
    NAME``_exp.push_back(shd_model(EE, NBB, am, rd, rf));                                    \
    for (int w0 = 0; w0 < L; w0 += NBB) begin                                            \
      while (gaps && ($urandom % 3 == 0)) begin NAME``_iv = 0; @(negedge clk); end       \
      NAME``_iv = 1;                                                                     \
      NAME``_ird = {$urandom, $urandom}; NAME``_irf = {$urandom, $urandom};              \
      for (int i = 0; i < NBB; i++) if (w0 + i < L) begin                                \
        NAME``_ird[2*i +: 2] = rd[w0 + i]; NAME``_irf[2*i +: 2] = rf[w0 + i];            \
      end                                                                                \
      NAME``_inb = (L - w0 >= NBB) ? NBB : L - w0;                                       \
      NAME``_il = (w0 + NBB >= L);                                                       \
      @(negedge clk);                                                                    \
    end                                                                                  \
    NAME``_iv = 0;                                                                       \
  endtask

  `SHD_LANE(fig, 1, 16)
  `SHD_LANE(sml, 2, 16)
  `SHD_LANE(full, 5, 256)

  function automatic logic [1:0] enc(input byte c);
    case (c)
      "A": return 2'd0;
      "C": return 2'd1;
      "G": return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  task automatic make_pair(input int L, input int nedit, output logic [1:0] rd [$], output logic [1:0] rf [$]);
    rd.delete(); rf.delete();
    for (int i = 0; i < L; i++) rd.push_back(2'($urandom));
    rf = rd;
    for (int k = 0; k < nedit; k++) begin
      int p;
      p = $urandom % L;
      case ($urandom % 3)
        0: rf[p] = 2'($urandom);
        1: begin rf.insert(p, 2'($urandom)); void'(rf.pop_back()); end
        default: begin rf.delete(p); rf.push_back(2'($urandom)); end
      endcase
    end
  endtask

  initial begin
    string sr, sf;
    logic [1:0] rd [$], rf [$];
    fig_iv = 0; sml_iv = 0; full_iv = 0;
    fig_il = 0; sml_il = 0; full_il = 0;
    fig_ird = '0; fig_irf = '0; sml_ird = '0; sml_irf = '0; full_ird = '0; full_irf = '0;
    fig_inb = '0; sml_inb = '0; full_inb = '0;
    fig_amend = 0; sml_amend = 0; full_amend = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    // worked example
    sr = "ACGAGACGT"; sf = "ACAAGAGTG";
    rd.delete(); rf.delete();
    for (int i = 0; i < sr.len(); i++) begin rd.push_back(enc(sr[i])); rf.push_back(enc(sf[i])); end
    for (int am = 0; am < 4; am++) begin
      checks++;
      if (shd_model(1, 16, am, rd, rf) != 2) begin failures++; $display("model disagrees with the worked example"); end
      fig_pair(rd, rf, am, 0);
      repeat (6) @(negedge clk);
    end
    // random pairs, sml and full instances running side by side
    fork
      for (int t = 0; t < 300; t++) begin
        logic [1:0] a [$], b [$];
        int am;
        am = $urandom % 4;
        make_pair(1 + $urandom % 48, $urandom % 5, a, b);
        if (shd_model(2, 16, am, a, b) != shd_model(2, 16, 0, a, b)) n_amend_diff++;
        sml_pair(a, b, am, t % 2);
        if ($urandom % 4 == 0) repeat (5) @(negedge clk);
      end
      for (int t = 0; t < 60; t++) begin
        logic [1:0] a [$], b [$];
        int am;
        am = $urandom % 4;
        make_pair(1 + $urandom % 700, $urandom % 8, a, b);
        full_pair(a, b, am, t % 2);
        if ($urandom % 4 == 0) repeat (5) @(negedge clk);
      end
    join
    repeat (10) @(negedge clk);
    checks++;
    if (fig_exp.size() + sml_exp.size() + full_exp.size() != 0) begin failures++; $display("missing results"); end
    checks++;
    if (n_acc == 0 || n_rej == 0 || n_amend_diff == 0) begin
      failures++; $display("coverage: accepted %0d rejected %0d amendment mattered %0d", n_acc, n_rej, n_amend_diff);
    end
    $display("accepted %0d rejected %0d amendment mattered %0d", n_acc, n_rej, n_amend_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
