// ascii_parser: front end of the compressor for text input. It turns
// FASTA-style ASCII into 2-bit bases and packs them into 32-bit strides of
// 16 bases, the unit the stride shifter works on.
//
// Each beat carries up to IN_BYTES characters (in_keep marks valid bytes,
// byte 0 first). Characters are handled in order within the beat:
//   '>' starts a header line, which is skipped up to and including '\n';
//   A/C/G/T (either case) become 00/01/10/11;
//   any other letter (N, IUPAC codes) becomes 00 and is counted in n_other;
//   everything else (newline, CR, spaces, digits) is dropped.
// The kept bases are compacted by a prefix count into a 2*S-base holding
// register; a full stride (bits [31:0], first base in [1:0]) is offered on
// out_* and the remainder is shifted down. A beat is accepted only when the
// holding register can take all of it (at most S bases stay after a pop), so
// throughput is one stride per cycle with IN_BYTES = 16.
// The paper states only that ASCII input "is first encoded in binary format";
// the character handling and the base code are choices of this design.
// flush: emits a trailing partial stride padded with A (00) and marks
// out_partial, so the tail of a sequence is not lost.
module ascii_parser
  import bancroft_pkg::*;
#(
  parameter int unsigned IN_BYTES = 16
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [8*IN_BYTES-1:0] in_data,
  input  logic [IN_BYTES-1:0]   in_keep,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic                  flush,      // pulse: emit any partial stride
  output logic [STRIDE_W-1:0]   out_stride,
  output logic                  out_partial,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [31:0]           n_other
);
  localparam int unsigned HOLD = S_BASES + IN_BYTES;  // bases the register can hold
  localparam int unsigned CW   = $clog2(HOLD + 1);

  logic [2*HOLD-1:0] hold_q;
  logic [CW-1:0]     cnt_q;
  logic              in_hdr_q;
  logic              flush_q;

  // per-character decode
  logic [IN_BYTES-1:0] keep_base, is_other;
  logic [1:0]          code [IN_BYTES];
  logic                hdr_after;
  logic [CW-1:0]       nnew;

  always_comb begin
    logic hdr;
    logic [7:0] c;
    hdr = in_hdr_q;
    nnew = '0;
    for (int i = 0; i < IN_BYTES; i++) begin
      c = in_data[8*i +: 8];
      keep_base[i] = 1'b0;
      is_other[i]  = 1'b0;
      code[i]      = 2'b00;
      if (in_keep[i]) begin
        if (hdr) begin
          if (c == 8'h0a) hdr = 1'b0;
        end else if (c == 8'h3e) begin            // '>'
          hdr = 1'b1;
        end else begin
          unique case (c)
            8'h41, 8'h61: begin keep_base[i] = 1'b1; code[i] = 2'b00; end // A a
            8'h43, 8'h63: begin keep_base[i] = 1'b1; code[i] = 2'b01; end // C c
            8'h47, 8'h67: begin keep_base[i] = 1'b1; code[i] = 2'b10; end // G g
            8'h54, 8'h74: begin keep_base[i] = 1'b1; code[i] = 2'b11; end // T t
            default: begin
              if ((c >= 8'h41 && c <= 8'h5a) || (c >= 8'h61 && c <= 8'h7a)) begin
                keep_base[i] = 1'b1;
                is_other[i]  = 1'b1;
              end
            end
          endcase
        end
      end
      nnew = nnew + CW'(keep_base[i]);
    end
    hdr_after = hdr;
  end

  // output side
  logic full_stride, do_pop, do_flush_out;
  assign full_stride  = (cnt_q >= CW'(S_BASES));
  assign do_flush_out = flush_q && !full_stride && (cnt_q != '0);
  assign out_valid    = full_stride || do_flush_out;
  assign out_stride   = hold_q[STRIDE_W-1:0];
  assign out_partial  = !full_stride;
  assign do_pop       = out_valid && out_ready;

  // bases left after this cycle's pop
  logic [CW-1:0] cnt_after_pop;
  assign cnt_after_pop = do_pop ? (full_stride ? cnt_q - CW'(S_BASES) : '0) : cnt_q;
  assign in_ready = (cnt_after_pop <= CW'(S_BASES)) && !flush_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold_q   <= '0;
      cnt_q    <= '0;
      in_hdr_q <= 1'b0;
      flush_q  <= 1'b0;
      n_other  <= '0;
    end else begin
      logic [2*HOLD-1:0] h;
      logic [CW-1:0]     pos;
      h = hold_q;
      if (do_pop) h = full_stride ? (h >> STRIDE_W) : '0;
      pos = cnt_after_pop;
      if (in_valid && in_ready) begin
        for (int i = 0; i < IN_BYTES; i++) begin
          if (keep_base[i]) begin
            h[2*pos +: 2] = code[i];
            pos = pos + 1'b1;
          end
        end
        in_hdr_q <= hdr_after;
        n_other  <= n_other + 32'($countones(is_other));
      end
      hold_q <= h;
      cnt_q  <= pos;
      if (flush) flush_q <= 1'b1;
      else if (do_flush_out || (flush_q && cnt_q == '0)) flush_q <= 1'b0;
    end
  end
endmodule
