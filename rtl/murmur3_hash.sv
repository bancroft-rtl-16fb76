// murmur3_hash: pipelined MurmurHash3 (x86, 32-bit result) of a 16-byte key,
// the hash the compressor uses for the cuckoo offset table. Two seeds give
// the two cuckoo hash functions.
//
// The 128-bit k-mer is taken as four little-endian 32-bit blocks, block 0 =
// bits [31:0]. Stage j (j = 0..3) mixes block j into the running state:
//   k = rotl(b*c1, 15)*c2;  h = rotl(h ^ k, 13)*5 + 0xe6546b64
// then h ^= 16 (key length) and the fmix32 finaliser runs over two stages.
// Latency is 6 cycles; one key per cycle. en stalls the whole pipeline
// (used for back-pressure). The algorithm is the published Murmur3; the
// pipeline cut and the seed values are choices of this design.
module murmur3_hash #(
  parameter logic [31:0] SEED = 32'h0000_0001
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [127:0] in_key,
  input  logic         in_valid,
  output logic [31:0]  out_hash,
  output logic         out_valid
);
  localparam logic [31:0] C1 = 32'hcc9e2d51;
  localparam logic [31:0] C2 = 32'h1b873593;

  function automatic logic [31:0] rotl(input logic [31:0] x, input int unsigned r);
    return (x << r) | (x >> (32 - r));
  endfunction

  function automatic logic [31:0] mix_block(input logic [31:0] h, input logic [31:0] b);
    logic [31:0] k, hn;
    k  = b * C1;
    k  = rotl(k, 15);
    k  = k * C2;
    hn = h ^ k;
    hn = rotl(hn, 13);
    return hn * 32'd5 + 32'he6546b64;
  endfunction

  logic [31:0]  h_q   [6];
  logic [127:0] key_q [3];
  logic [5:0]   v_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      v_q <= '0;
      for (int i = 0; i < 6; i++) h_q[i] <= '0;
      for (int i = 0; i < 3; i++) key_q[i] <= '0;
    end else if (en) begin
      logic [31:0] f;
      v_q <= {v_q[4:0], in_valid};
      h_q[0]   <= mix_block(SEED, in_key[31:0]);
      key_q[0] <= in_key;
      h_q[1]   <= mix_block(h_q[0], key_q[0][63:32]);
      key_q[1] <= key_q[0];
      h_q[2]   <= mix_block(h_q[1], key_q[1][95:64]);
      key_q[2] <= key_q[1];
      h_q[3]   <= mix_block(h_q[2], key_q[2][127:96]) ^ 32'd16;
      // fmix32, first half
      f = h_q[3] ^ (h_q[3] >> 16);
      h_q[4] <= f * 32'h85ebca6b;
      // fmix32, second half
      f = h_q[4] ^ (h_q[4] >> 13);
      f = f * 32'hc2b2ae35;
      h_q[5] <= f ^ (f >> 16);
    end
  end

  assign out_hash  = h_q[5];
  assign out_valid = v_q[5];
endmodule
