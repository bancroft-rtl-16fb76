// outbound_encoder: gathers, for every stride shift, the new 32-bit stride,
// the four 32-bit hashes and the four filter results, and sends them to
// software in stride order as one cmp_rec_t record (the 20 bytes of stride
// and hashes, plus four filter bits and a kmer_valid flag).
//
// The pieces arrive at different times: the stride when the shifter emits it
// (alloc_*), the hashes after the hash pipeline (hash_*), and the filter bits
// out of order from N_PC memory controllers (rsp_*). A reorder buffer of
// 2^CTAG_W entries holds them; alloc hands out the tag of the next free
// entry, and the head entry is sent once its hashes are in and all four
// lookups have answered (or at once when kmer_valid = 0, where no lookup is
// made and the hash fields are sent as zero). alloc_ready is low while the
// buffer is full, which throttles the whole compressor front end.
// Timing: a record can leave the cycle after its last lookup answers; one
// record per cycle at most. The record packing and the buffer are this
// design's; the paper gives only the 20-byte content.
module outbound_encoder
  import bancroft_pkg::*;
#(
  parameter int unsigned N_PC = 8
) (
  input  logic              clk,
  input  logic              rst,
  // allocation, in stride order
  input  logic              alloc_valid,
  output logic              alloc_ready,
  output logic [CTAG_W-1:0] alloc_tag,
  input  logic [31:0]       alloc_stride,
  input  logic              alloc_kmer_valid,
  // hash results
  input  logic              hash_valid,
  input  logic [CTAG_W-1:0] hash_tag,
  input  logic [3:0][31:0]  hash_val,
  // filter results
  input  logic [N_PC-1:0]   rsp_valid,
  input  flt_rsp_t          rsp [N_PC],
  // to software
  output logic              out_valid,
  input  logic              out_ready,
  output cmp_rec_t          out_rec
);
  localparam int unsigned DEPTH = 1 << CTAG_W;

  logic [31:0]      stride_q [DEPTH];
  logic [3:0][31:0] hash_q   [DEPTH];
  logic [DEPTH-1:0] kv_q, hashed_q;
  logic [3:0]       got_q    [DEPTH];
  logic [3:0]       hit_q    [DEPTH];
  logic [CTAG_W-1:0] head_q, tail_q;
  logic [CTAG_W:0]   used_q;

  assign alloc_ready = (used_q != (CTAG_W+1)'(DEPTH));
  assign alloc_tag   = tail_q;

  logic head_done;
  assign head_done = (used_q != '0) && hashed_q[head_q] &&
                     (!kv_q[head_q] || (got_q[head_q] == 4'b1111));
  assign out_valid = head_done;

  always_comb begin
    out_rec            = '0;
    out_rec.stride     = stride_q[head_q];
    if (kv_q[head_q]) begin
      out_rec.hash0    = hash_q[head_q][0];
      out_rec.hash1    = hash_q[head_q][1];
      out_rec.hash2    = hash_q[head_q][2];
      out_rec.hash3    = hash_q[head_q][3];
    end
    out_rec.kmer_valid = kv_q[head_q];
    out_rec.filt_hit   = kv_q[head_q] ? hit_q[head_q] : 4'b0000;
  end

  logic do_alloc, do_out;
  assign do_alloc = alloc_valid && alloc_ready;
  assign do_out   = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      head_q   <= '0;
      tail_q   <= '0;
      used_q   <= '0;
      kv_q     <= '0;
      hashed_q <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        got_q[i]    <= '0;
        hit_q[i]    <= '0;
        stride_q[i] <= '0;
        hash_q[i]   <= '0;
      end
    end else begin
      if (do_alloc) begin
        stride_q[tail_q] <= alloc_stride;
        kv_q[tail_q]     <= alloc_kmer_valid;
        hashed_q[tail_q] <= 1'b0;
        got_q[tail_q]    <= '0;
        hit_q[tail_q]    <= '0;
        tail_q           <= tail_q + 1'b1;
      end
      if (hash_valid) begin
        hash_q[hash_tag]   <= hash_val;
        hashed_q[hash_tag] <= 1'b1;
      end
      for (int p = 0; p < N_PC; p++) begin
        if (rsp_valid[p]) begin
          got_q[rsp[p].tag][rsp[p].lane] <= 1'b1;
          hit_q[rsp[p].tag][rsp[p].lane] <= rsp[p].hit;
        end
      end
      if (do_out) head_q <= head_q + 1'b1;
      used_q <= used_q + (CTAG_W+1)'(do_alloc) - (CTAG_W+1)'(do_out);
    end
  end
endmodule
