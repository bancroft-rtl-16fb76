// shuffler: joins decompressed pieces, in element order, into a gap-free
// stream of 512-bit (256-base) beats for the user kernel.
//
// Pieces come from two sources: verbatim runs (1..4 words of 16 bases, from
// the verbatim FIFO) and reference spans (64..256 bases, already aligned to
// base 0). The parser's piece descriptors say which source comes next and
// how many bases to keep (the last piece of a job may be cut short).
// Stage 1 takes the next descriptor together with its data and masks the
// data to its length. Stage 2 shifts the piece to the current fill level of
// a 1024-bit accumulator and ORs it in; whenever 256 or more bases are held,
// the low 256 leave as one output beat and the rest move down, so a beat can
// leave and a new piece enter in the same cycle. After the last piece of a
// job the remainder leaves as a short beat with out_last and out_nbases set.
// Throughput: one piece per cycle, i.e. up to one full beat per cycle from
// reference spans. The paper describes a multi-cycle pipelined shifter with a
// sorting-network compaction stage; because pieces here never contain gaps,
// this design uses the two-stage shift-and-OR instead.
module shuffler
  import bancroft_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             piece_valid,
  output logic             piece_ready,
  input  piece_t           piece,
  input  logic             verb_valid,
  output logic             verb_ready,
  input  logic [3:0][31:0] verb_data,
  input  logic             ref_valid,
  output logic             ref_ready,
  input  logic [BUS_W-1:0] ref_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [BUS_W-1:0] out_data,
  output logic [8:0]       out_nbases,
  output logic             out_last
);
  // ---------------- stage 1 ----------------
  logic             s1_valid_q, s1_last_q;
  logic [BUS_W-1:0] s1_data_q;
  logic [8:0]       s1_nb_q;
  logic             s1_take;     // stage 2 consumes stage 1
  logic             s1_load;

  logic src_ok;
  assign src_ok  = piece.from_ref ? ref_valid : verb_valid;
  assign s1_load = piece_valid && src_ok && (!s1_valid_q || s1_take);
  assign piece_ready = s1_load;
  assign ref_ready   = s1_load && piece.from_ref;
  assign verb_ready  = s1_load && !piece.from_ref;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid_q <= 1'b0;
      s1_last_q  <= 1'b0;
      s1_data_q  <= '0;
      s1_nb_q    <= '0;
    end else begin
      if (s1_take) s1_valid_q <= 1'b0;
      if (s1_load) begin
        logic [BUS_W-1:0] d, mask;
        d = piece.from_ref ? ref_data : BUS_W'(verb_data);
        mask = (piece.nbases >= 9'(BUS_BASES)) ? '1 : ((BUS_W'(1) << (2 * piece.nbases)) - 1'b1);
        s1_valid_q <= 1'b1;
        s1_data_q  <= d & mask;
        s1_nb_q    <= piece.nbases;
        s1_last_q  <= piece.last;
      end
    end
  end

  // ---------------- stage 2 ----------------
  logic [2*BUS_W-1:0] acc_q;
  logic [9:0]         cnt_q;     // bases held, 0..511
  logic               flush_q;   // last piece absorbed

  logic emit_full, emit_last;
  assign emit_full  = (cnt_q >= 10'(BUS_BASES));
  assign emit_last  = flush_q && (cnt_q <= 10'(BUS_BASES)) && (cnt_q != '0);
  assign out_valid  = emit_full || emit_last;
  assign out_data   = acc_q[BUS_W-1:0];
  assign out_nbases = emit_full ? 9'(BUS_BASES) : 9'(cnt_q);
  assign out_last   = emit_last;

  logic       emit;
  logic [9:0] cnt_after_emit;
  assign emit = out_valid && out_ready;
  assign cnt_after_emit = emit ? (emit_full ? cnt_q - 10'(BUS_BASES) : 10'd0) : cnt_q;
  assign s1_take = s1_valid_q && !flush_q && (cnt_after_emit < 10'(BUS_BASES));

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_q   <= '0;
      cnt_q   <= '0;
      flush_q <= 1'b0;
    end else begin
      logic [2*BUS_W-1:0] a;
      logic [9:0]         c;
      a = acc_q;
      if (emit) a = emit_full ? (a >> BUS_W) : '0;
      c = cnt_after_emit;
      if (s1_take) begin
        a = a | ({{BUS_W{1'b0}}, s1_data_q} << (2 * c));
        c = c + 10'(s1_nb_q);
        if (s1_last_q) flush_q <= 1'b1;
      end
      if (emit && emit_last) flush_q <= 1'b0;
      acc_q <= a;
      cnt_q <= c;
    end
  end
endmodule
