// shd_filter: Shifted-Hamming-Distance pre-alignment filter, the example user
// kernel that consumes decompressed reads and references.
//
// A read is compared with 2E+1 copies of the reference shifted by -E..+E
// bases. For every shift s a Hamming mask is built, bit i = 1 when read base
// i differs from reference base i+s. Bases shifted in from beyond either end
// of the sequence count as matches (0), as in the paper's worked example.
// An amendment stage then fills short runs of zeros between ones in each
// mask (amend[0]: 101 -> 111, amend[1]: 1001 -> 1111; inside one window).
// amend is a configuration input: change it only between pairs.
// The masks are ANDed, and a tree of saturating 3-bit adders counts the ones
// left, an estimate of the edit distance. Windows of NB bases (512 bits) are
// processed one per cycle; a window is evaluated when the next one arrives
// (its first E reference bases are needed for the +s shifts) or at once when
// it is the last of a pair. Per-window counts are summed with saturation at
// 7, and at the end of a pair res_dist is given with res_accept = (res_dist
// <= E). Latency: one window of look-ahead plus three register stages.
// The mask/AND/count structure, E = 5 and the 512-bit windows follow the
// paper; the boundary rule for neighbouring windows, the amendment patterns
// offered and the per-pair saturating sum are this design's choices.
module shd_filter
  import bancroft_pkg::*;
#(
  parameter int unsigned E  = 5,
  parameter int unsigned NB = BUS_BASES
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [1:0]      amend,
  input  logic            in_valid,
  input  logic [2*NB-1:0] in_read,
  input  logic [2*NB-1:0] in_ref,
  input  logic [$clog2(NB):0] in_nbases,  // valid bases in this window
  input  logic            in_last,          // last window of the pair
  output logic            res_valid,
  output logic [2:0]      res_dist,
  output logic            res_accept
);
  localparam int unsigned NW = $clog2(NB) + 1;

  // ---------------- window buffer ----------------
  logic            cur_v_q, cur_last_q, cur_first_q;
  logic [2*NB-1:0] cur_read_q, cur_ref_q;
  logic [NW-1:0]   cur_nb_q;
  logic [2*E-1:0]  prev_tail_q;     // last E reference bases of the previous window
  logic            next_pair_first_q;

  // evaluate the buffered window now?
  logic eval;
  assign eval = cur_v_q && (cur_last_q || in_valid);

  // ---------------- stage 1: masks, amendment, AND ----------------
  // One generate branch per shift s = -E..+E; every mask bit has its
  // reference base index j = i + s fixed at elaboration.
  logic [NB-1:0] amask [2*E+1];

  for (genvar si = 0; si < 2 * E + 1; si++) begin : g_shift
    logic [NB-1:0] m, a;
    for (genvar i = 0; i < NB; i++) begin : g_bit
      localparam int J  = i + si - int'(E);
      // clamped indices, so that branches not taken for this J stay in range
      localparam int JP = (J < 0) ? J + int'(E) : 0;
      localparam int JN = (J >= int'(NB)) ? J - int'(NB) : 0;
      localparam int JC = (J >= 0 && J < int'(NB)) ? J : 0;
      logic [1:0] rb;
      logic       vac;
      always_comb begin
        vac = 1'b0;
        rb  = 2'b00;
        if (J < 0) begin
          if (cur_first_q) vac = 1'b1;
          else rb = prev_tail_q[2*JP +: 2];
        end else if (J >= int'(NB)) begin
          if (cur_last_q) vac = 1'b1;
          else if (in_last && (J - int'(NB)) >= int'(in_nbases)) vac = 1'b1;
          else rb = in_ref[2*JN +: 2];
        end else if (J >= int'(cur_nb_q)) begin
          if (cur_last_q) vac = 1'b1;
          else rb = cur_ref_q[2*JC +: 2];
        end else begin
          rb = cur_ref_q[2*JC +: 2];
        end
        m[i] = (i < int'(cur_nb_q)) && !vac && (cur_read_q[2*i +: 2] != rb);
      end
    end
    always_comb begin
      a = m;
      for (int i = 1; i < int'(NB) - 1; i++)
        if (amend[0] && m[i-1] && !m[i] && m[i+1]) a[i] = 1'b1;
      for (int i = 1; i < int'(NB) - 2; i++)
        if (amend[1] && m[i-1] && !m[i] && !m[i+1] && m[i+2]) begin
          a[i] = 1'b1; a[i+1] = 1'b1;
        end
    end
    assign amask[si] = a;
  end

  logic [NB-1:0] final_vec;
  always_comb begin
    final_vec = '1;
    for (int k = 0; k < 2 * int'(E) + 1; k++) final_vec = final_vec & amask[k];
  end

  logic          s1_v_q, s1_last_q;
  logic [NB-1:0] s1_vec_q;

  // ---------------- stage 2: saturating 3-bit adder tree ----------------
  function automatic logic [2:0] sat_add(input logic [2:0] x, input logic [2:0] y);
    logic [3:0] t;
    t = {1'b0, x} + {1'b0, y};
    return t[3] ? 3'd7 : t[2:0];
  endfunction

  logic [2:0] win_cnt;
  always_comb begin
    logic [2:0] lvl [NB];
    int n;
    for (int i = 0; i < int'(NB); i++) lvl[i] = {2'b00, s1_vec_q[i]};
    n = int'(NB);
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) lvl[i] = sat_add(lvl[2*i], lvl[2*i+1]);
      if (n % 2 == 1) lvl[n/2] = lvl[n-1];
      n = (n + 1) / 2;
    end
    win_cnt = lvl[0];
  end

  logic       s2_v_q, s2_last_q;
  logic [2:0] s2_cnt_q;
  logic [2:0] pair_acc_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_v_q <= 1'b0; cur_last_q <= 1'b0; cur_first_q <= 1'b1;
      cur_read_q <= '0; cur_ref_q <= '0; cur_nb_q <= '0;
      prev_tail_q <= '0; next_pair_first_q <= 1'b1;
      s1_v_q <= 1'b0; s1_last_q <= 1'b0; s1_vec_q <= '0;
      s2_v_q <= 1'b0; s2_last_q <= 1'b0; s2_cnt_q <= '0;
      pair_acc_q <= '0;
      res_valid <= 1'b0; res_dist <= '0; res_accept <= 1'b0;
    end else begin
      // window buffer
      if (eval) begin
        cur_v_q     <= 1'b0;
        prev_tail_q <= cur_ref_q[2*NB-1 -: 2*E];
      end
      if (in_valid) begin
        cur_v_q     <= 1'b1;
        cur_read_q  <= in_read;
        cur_ref_q   <= in_ref;
        cur_nb_q    <= NW'(in_nbases);
        cur_last_q  <= in_last;
        cur_first_q <= next_pair_first_q;
        next_pair_first_q <= in_last;
      end
      // stage 1
      s1_v_q    <= eval;
      s1_last_q <= cur_last_q;
      s1_vec_q  <= final_vec;
      // stage 2
      s2_v_q    <= s1_v_q;
      s2_last_q <= s1_last_q;
      s2_cnt_q  <= win_cnt;
      // pair accumulation
      res_valid <= 1'b0;
      if (s2_v_q) begin
        logic [2:0] tot;
        tot = sat_add(pair_acc_q, s2_cnt_q);
        if (s2_last_q) begin
          res_valid  <= 1'b1;
          res_dist   <= tot;
          res_accept <= (tot <= 3'(E));
          pair_acc_q <= '0;
        end else begin
          pair_acc_q <= tot;
        end
      end
    end
  end
endmodule
