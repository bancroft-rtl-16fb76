// filter_router: sends the four probabilistic-filter lookups of one k-mer to
// the memory controllers of the HBM pseudo channels (PCs) that hold the
// hashed slots.
//
// The 4-bit filter table has one entry per 32-bit hash value (2^32 entries,
// 2 GB). It is split evenly over N_PC channels: the top log2(N_PC) hash bits
// pick the PC, the remaining bits index the entry inside it (this mapping is
// a choice of this design; the paper says only that hashes are routed to
// "one of many memory controllers").
// A k-mer's four lookups are held in a register; each cycle every PC is
// offered the lowest-numbered pending lane that maps to it, and lanes whose
// request is accepted are cleared. A new k-mer is taken when no lane remains
// pending, so lookups that fall on different PCs go out in one cycle and
// colliding ones are serialised. A k-mer without a valid window (kmer_valid
// = 0) is consumed without lookups.
module filter_router
  import bancroft_pkg::*;
#(
  parameter int unsigned N_PC = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [3:0][31:0]  in_hash,
  input  logic [3:0][3:0]   in_nib,
  input  logic [CTAG_W-1:0] in_tag,
  input  logic              in_kmer_valid,
  output logic [N_PC-1:0]   req_valid,
  input  logic [N_PC-1:0]   req_ready,
  output flt_req_t          req [N_PC]
);
  localparam int unsigned PW = (N_PC > 1) ? $clog2(N_PC) : 1;
  localparam int unsigned IW = 32 - $clog2(N_PC);

  logic [3:0]        pend_q;
  logic [3:0][31:0]  hash_q;
  logic [3:0][3:0]   nib_q;
  logic [CTAG_W-1:0] tag_q;

  function automatic logic [PW-1:0] pc_of(input logic [31:0] h);
    if (N_PC > 1) return PW'(h >> IW);
    else          return '0;
  endfunction

  logic [3:0] grant_done;

  always_comb begin
    grant_done = '0;
    for (int p = 0; p < N_PC; p++) begin
      logic found;
      found        = 1'b0;
      req_valid[p] = 1'b0;
      req[p]       = '0;
      for (int l = 0; l < 4; l++) begin
        if (!found && pend_q[l] && (pc_of(hash_q[l]) == PW'(p))) begin
          found        = 1'b1;
          req_valid[p] = 1'b1;
          req[p].idx   = (IW >= 32) ? hash_q[l] : (hash_q[l] & ((32'd1 << IW) - 32'd1));
          req[p].nib   = nib_q[l];
          req[p].tag   = tag_q;
          req[p].lane  = 2'(l);
          if (req_ready[p]) grant_done[l] = 1'b1;
        end
      end
    end
  end

  logic [3:0] pend_next;
  assign pend_next = pend_q & ~grant_done;
  assign in_ready  = (pend_next == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      pend_q <= '0;
      hash_q <= '0;
      nib_q  <= '0;
      tag_q  <= '0;
    end else begin
      pend_q <= pend_next;
      if (in_valid && in_ready) begin
        pend_q <= in_kmer_valid ? 4'b1111 : 4'b0000;
        hash_q <= in_hash;
        nib_q  <= in_nib;
        tag_q  <= in_tag;
      end
    end
  end
endmodule
