// ref_router: turns reference requests of the decompressor into reads of
// 512-bit reference words, routes each read to the HBM pseudo channel (PC)
// that holds it, and returns the requested span aligned to base 0.
//
// The 2-bit reference is stored contiguously over N_PC channels: word w
// (256 bases) lives in PC w >> PC_WORDS_LOG2 at address w mod 2^PC_WORDS_LOG2
// (layout chosen here). A request covers 64*nkmer <= 256 bases starting at
// any base offset, so it touches one or two words; they are issued one per
// cycle. The PC of every issued read goes into an order FIFO; since each PC
// answers in order, taking responses in the order of that FIFO restores
// request order. An aligner then joins the one or two words, shifts the
// span down to bit 0, clears the bases above it and, for reverse runs,
// reverse-complements it. out_* carries the span (first base in bits [1:0])
// and its length. The paper names a router between parser and memory
// controllers; the alignment step is this design's, placed here so that the
// shuffler only ever sees gap-free pieces.
module ref_router
  import bancroft_pkg::*;
#(
  parameter int unsigned N_PC          = 3,
  parameter int unsigned PC_WORDS_LOG2 = 22
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  ref_req_t                in_req,
  output logic [N_PC-1:0]         pc_req_valid,
  input  logic [N_PC-1:0]         pc_req_ready,
  output logic [PC_WORDS_LOG2-1:0] pc_req_addr [N_PC],
  input  logic [N_PC-1:0]         pc_rsp_valid,
  output logic [N_PC-1:0]         pc_rsp_ready,
  input  logic [BUS_W-1:0]        pc_rsp_data [N_PC],
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [BUS_W-1:0]        out_data,
  output logic [8:0]              out_nbases
);
  localparam int unsigned PW = (N_PC > 1) ? $clog2(N_PC) : 1;

  // ---------------- issue side ----------------
  logic        busy_q, second_q;
  ref_req_t    cur_q;
  logic [31:0] w0, w1, wsel;
  logic [PW-1:0] pc_sel;
  logic        two_words;

  // one-hot free: the order FIFO and meta FIFO must have space
  logic ord_ready, meta_ready;

  always_comb begin
    logic [31:0] end_base;
    w0        = cur_q.start >> 8;
    end_base  = cur_q.start + 32'(cur_q.nkmer) * 32'd64 - 32'd1;
    w1        = end_base >> 8;
    two_words = (w1 != w0);
    wsel      = second_q ? w1 : w0;
    pc_sel    = PW'(wsel >> PC_WORDS_LOG2);
  end

  logic issue;
  always_comb begin
    for (int p = 0; p < N_PC; p++) begin
      pc_req_valid[p] = busy_q && ord_ready && (pc_sel == PW'(p));
      pc_req_addr[p]  = PC_WORDS_LOG2'(wsel);
    end
  end
  assign issue = busy_q && ord_ready && pc_req_ready[pc_sel];

  logic last_issue;
  assign last_issue = issue && (second_q || !two_words);
  assign in_ready   = (!busy_q || last_issue) && meta_ready;

  typedef struct packed {
    logic [7:0] off;    // base offset inside the first word
    logic       two;
    logic [2:0] nkmer;
    logic       rc;
  } meta_t;
  meta_t meta_in, meta_out;
  logic  meta_valid, meta_pop;
  always_comb begin
    logic [31:0] e;
    e = in_req.start + 32'(in_req.nkmer) * 32'd64 - 32'd1;
    meta_in.off   = in_req.start[7:0];
    meta_in.two   = ((e >> 8) != (in_req.start >> 8));
    meta_in.nkmer = in_req.nkmer;
    meta_in.rc    = in_req.rc;
  end

  sync_fifo #(.W($bits(meta_t)), .DEPTH(16)) u_meta (
    .clk, .rst,
    .in_valid(in_valid && in_ready), .in_ready(meta_ready), .in_data(meta_in),
    .out_valid(meta_valid), .out_ready(meta_pop), .out_data(meta_out), .count());

  logic [PW-1:0] ord_out;
  logic          ord_valid, ord_pop;
  sync_fifo #(.W(PW), .DEPTH(32)) u_ord (
    .clk, .rst,
    .in_valid(issue), .in_ready(ord_ready), .in_data(pc_sel),
    .out_valid(ord_valid), .out_ready(ord_pop), .out_data(ord_out), .count());

  always_ff @(posedge clk) begin
    if (rst) begin
      busy_q   <= 1'b0;
      second_q <= 1'b0;
      cur_q    <= '0;
    end else begin
      if (issue) second_q <= !last_issue;
      if (last_issue) busy_q <= 1'b0;
      if (in_valid && in_ready) begin
        busy_q   <= 1'b1;
        second_q <= 1'b0;
        cur_q    <= in_req;
      end
    end
  end

  // ---------------- return side ----------------
  logic             have_lo_q;
  logic [BUS_W-1:0] lo_q;
  logic             rsp_here;
  logic [BUS_W-1:0] rsp_word;
  assign rsp_here = ord_valid && pc_rsp_valid[ord_out];
  assign rsp_word = pc_rsp_data[ord_out];

  // a span completes with this word when it is the only word or the second
  logic complete;
  assign complete = rsp_here && meta_valid && (!meta_out.two || have_lo_q);

  // aligned result register
  logic take;
  assign take = rsp_here && meta_valid && (!complete || !out_valid || out_ready);
  assign ord_pop = take;
  assign meta_pop = take && complete;

  always_comb begin
    for (int p = 0; p < N_PC; p++) pc_rsp_ready[p] = take && (ord_out == PW'(p));
  end

  function automatic logic [BUS_W-1:0] align(input logic [2*BUS_W-1:0] pair, input meta_t m);
    logic [2*BUS_W-1:0] sh;
    logic [BUS_W-1:0]   v, mask, r;
    int unsigned        nb;
    sh   = pair >> (2 * m.off);
    v    = sh[BUS_W-1:0];
    nb   = 64 * m.nkmer;
    mask = (nb >= BUS_BASES) ? '1 : ((BUS_W'(1) << (2 * nb)) - 1'b1);
    v    = v & mask;
    if (m.rc) begin
      for (int i = 0; i < BUS_BASES; i++) r[2*i +: 2] = ~v[2*(BUS_BASES-1-i) +: 2];
      r = r >> (2 * (BUS_BASES - nb));
      v = r;
    end
    return v;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      have_lo_q  <= 1'b0;
      lo_q       <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_nbases <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (!complete) begin
          lo_q      <= rsp_word;
          have_lo_q <= 1'b1;
        end else begin
          have_lo_q  <= 1'b0;
          out_valid  <= 1'b1;
          out_data   <= align(meta_out.two ? {rsp_word, lo_q} : {{BUS_W{1'b0}}, rsp_word}, meta_out);
          out_nbases <= 9'(64 * meta_out.nkmer);
        end
      end
    end
  end
endmodule
