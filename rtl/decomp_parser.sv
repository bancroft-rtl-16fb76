// decomp_parser: front end of the decompressor. It walks the grouped-header
// format and turns it into ordered work for the rest of the decompressor.
//
// Format: a chunk is one 32-bit header holding sixteen 2-bit element codes
// (element i in bits [2i+1:2i]) followed by one 32-bit payload word per
// element that is not a continuation:
//   00 verbatim      payload = 16 bases                  -> 16 bases
//   01 forward match payload = reference base offset I  -> ref[I, I+64)
//   10 reverse match payload = I                        -> rc(ref[I, I+64))
//   11 continuation  no payload: the next k-mer in the reference (I+64 when
//                    the run is forward, I-64 when it is reverse)  -> 64 bases
// The parser looks at a window of four header slots at a time. Each cycle it
// takes the longest run (at most four, not past the chunk end) of either
// consecutive verbatims, or a match/continuation followed by continuations.
// A verbatim run pushes up to four payload words at once to the verbatim
// FIFO; a k-mer run becomes one reference request for the 64*n contiguous
// bases it covers (a reverse run of n starting at I covers
// [I-64(n-1), I+64) and is reverse-complemented as a whole). For every run a
// piece descriptor (source, base count) goes to the shuffler so that it can
// restore element order.
// A job starts with job_start/job_bases (decompressed length in bases) at a
// chunk boundary; the last piece is cut to the length and flagged last, and
// payload words left in the last chunk are dropped. Compressed words arrive
// 1..4 per beat into an 8-word buffer. A run is issued only when all three
// outputs are ready. The format follows the paper; the bit order inside the
// header, the job framing and the buffer sizes are this design's choices.
module decomp_parser
  import bancroft_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic            job_start,
  input  logic [31:0]     job_bases,
  output logic            busy,
  // compressed words
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [3:0][31:0] in_data,
  input  logic [2:0]      in_nwords,
  // reference requests
  output logic            ref_valid,
  input  logic            ref_ready,
  output ref_req_t        ref_req,
  // verbatim words (word 0 first), count 1..4
  output logic            verb_valid,
  input  logic            verb_ready,
  output logic [3:0][31:0] verb_data,
  output logic [2:0]      verb_n,
  // piece order for the shuffler
  output logic            piece_valid,
  input  logic            piece_ready,
  output piece_t          piece
);
  // ---------------- word buffer ----------------
  logic [31:0] buf_q [8];
  logic [3:0]  bcnt_q;
  logic [2:0]  npop;          // words consumed this cycle


  // ---------------- chunk / job state ----------------
  logic        hdr_v_q;
  logic [31:0] hdr_q;
  logic [4:0]  pos_q;        // next element in the chunk
  logic [31:0] rem_q;        // bases still to produce
  logic        rev_q;        // direction of the last k-mer run
  logic [31:0] last_idx_q;   // reference offset of the last k-mer emitted
  logic        drain_q;      // dropping payload of a finished job's chunk
  logic [4:0]  drain_n_q;

  assign busy = (rem_q != '0) || drain_q;

  function automatic elem_e field(input logic [31:0] h, input logic [3:0] i);
    return elem_e'(h[2*i +: 2]);
  endfunction

  // ---------------- run selection ----------------
  logic        do_hdr, do_run, do_drain;
  logic [2:0]  run_n;
  logic [8:0]  run_bases;
  logic        run_is_ref, run_rc, run_last;
  logic [31:0] run_start, run_last_idx;
  logic [4:0]  pay_left;       // payload words after this run in the chunk

  always_comb begin
    elem_e  f0;
    logic   stop;
    logic [31:0] acc;
    logic [31:0] idx;
    do_hdr = 1'b0; do_run = 1'b0; do_drain = 1'b0;
    npop = '0; run_n = '0; run_bases = '0; run_is_ref = 1'b0; run_rc = 1'b0;
    run_start = '0; run_last_idx = last_idx_q; run_last = 1'b0; pay_left = '0;
    f0 = field(hdr_q, pos_q[3:0]);
    idx = buf_q[0];
    if (drain_q) begin
      do_drain = 1'b1;
      npop = 3'd4;
      if (5'(bcnt_q) < 5'(npop)) npop = 3'(bcnt_q);
      if (drain_n_q < 5'(npop)) npop = 3'(drain_n_q);
    end else if (rem_q != '0 && !hdr_v_q) begin
      if (bcnt_q != '0) begin
        do_hdr = 1'b1;
        npop = 3'd1;
      end
    end else if (rem_q != '0) begin
      // grow the run over the 4-slot window
      acc  = '0;
      stop = 1'b0;
      for (int j = 0; j < 4; j++) begin
        logic [4:0] p;
        elem_e      fj;
        logic       ok;
        p  = pos_q + 5'(j);
        fj = (p < 5'd16) ? field(hdr_q, p[3:0]) : EL_VERBATIM;
        if (f0 == EL_VERBATIM) ok = (fj == EL_VERBATIM) && (bcnt_q >= 4'(j + 1));
        else                   ok = (j == 0) ? ((f0 == EL_CONT) || (bcnt_q != '0)) : (fj == EL_CONT);
        if (!stop && p < 5'd16 && ok && acc < rem_q) begin
          run_n = run_n + 1'b1;
          acc   = acc + ((f0 == EL_VERBATIM) ? 32'd16 : 32'd64);
        end else begin
          stop = 1'b1;
        end
      end
      if (run_n != '0) begin
        do_run     = 1'b1;
        run_is_ref = (f0 != EL_VERBATIM);
        run_last   = (acc >= rem_q);
        run_bases  = run_last ? 9'(rem_q) : 9'(acc);
        unique case (f0)
          EL_VERBATIM: npop = run_n;
          EL_FWD: begin
            npop = 3'd1;
            run_rc = 1'b0;
            run_start = idx;
            run_last_idx = idx + (32'(run_n) - 32'd1) * 32'd64;
          end
          EL_REV: begin
            npop = 3'd1;
            run_rc = 1'b1;
            run_start = idx - (32'(run_n) - 32'd1) * 32'd64;
            run_last_idx = run_start;
          end
          default: begin // continuation of the previous run
            npop = 3'd0;
            run_rc = rev_q;
            if (rev_q) begin
              run_start    = last_idx_q - 32'(64 * run_n);
              run_last_idx = run_start;
            end else begin
              run_start    = last_idx_q + 32'd64;
              run_last_idx = last_idx_q + 32'(64 * run_n);
            end
          end
        endcase
        // payload words still in this chunk after the run
        for (int i = 0; i < 16; i++)
          if (5'(i) >= pos_q + 5'(run_n) && field(hdr_q, 4'(i)) != EL_CONT) pay_left = pay_left + 1'b1;
      end
    end
  end

  logic outs_ready;
  assign outs_ready = ref_ready && verb_ready && piece_ready;

  assign ref_valid     = do_run && run_is_ref && outs_ready;
  assign ref_req.start = run_start;
  assign ref_req.nkmer = run_n;
  assign ref_req.rc    = run_rc;
  assign verb_valid    = do_run && !run_is_ref && outs_ready;
  assign verb_n        = run_n;
  always_comb begin
    for (int j = 0; j < 4; j++) verb_data[j] = (3'(j) < run_n) ? buf_q[j] : 32'h0;
  end
  assign piece_valid     = do_run && outs_ready;
  assign piece.from_ref  = run_is_ref;
  assign piece.nbases    = run_bases;
  assign piece.last      = run_last;

  logic run_fire;
  assign run_fire = do_run && outs_ready;
  logic [2:0] pop_now;
  assign pop_now = (do_hdr || do_drain || run_fire) ? npop : 3'd0;
  assign in_ready = ((bcnt_q - 4'(pop_now)) <= 4'd4);

  always_ff @(posedge clk) begin
    if (rst) begin
      bcnt_q <= '0; hdr_v_q <= 1'b0; hdr_q <= '0; pos_q <= '0; rem_q <= '0;
      rev_q <= 1'b0; last_idx_q <= '0; drain_q <= 1'b0; drain_n_q <= '0;
      for (int i = 0; i < 8; i++) buf_q[i] <= '0;
    end else begin
      // word buffer: pop then append
      logic [31:0] b [8];
      logic [3:0]  c;
      for (int i = 0; i < 8; i++) b[i] = (i + int'(pop_now) < 8) ? buf_q[i + int'(pop_now)] : 32'h0;
      c = bcnt_q - 4'(pop_now);
      if (in_valid && in_ready) begin
        for (int j = 0; j < 4; j++)
          if (3'(j) < in_nwords) b[int'(c) + j] = in_data[j];
        c = c + 4'(in_nwords);
      end
      for (int i = 0; i < 8; i++) buf_q[i] <= b[i];
      bcnt_q <= c;

      if (job_start) begin
        rem_q      <= job_bases;
        hdr_v_q    <= 1'b0;
        rev_q      <= 1'b0;
        last_idx_q <= '0;
      end
      if (do_hdr) begin
        hdr_q   <= buf_q[0];
        hdr_v_q <= 1'b1;
        pos_q   <= '0;
      end
      if (do_drain) begin
        drain_n_q <= drain_n_q - 5'(pop_now);
        if (drain_n_q == 5'(pop_now)) drain_q <= 1'b0;
      end
      if (run_fire) begin
        pos_q <= pos_q + 5'(run_n);
        if (pos_q + 5'(run_n) == 5'd16) hdr_v_q <= 1'b0;
        rem_q <= rem_q - 32'(run_bases);
        if (run_is_ref) begin
          rev_q      <= run_rc;
          last_idx_q <= run_last_idx;
        end
        if (run_last) begin
          hdr_v_q <= 1'b0;
          if (pay_left != '0) begin
            drain_q   <= 1'b1;
            drain_n_q <= pay_left;
          end
        end
      end
    end
  end
endmodule
