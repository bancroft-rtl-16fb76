// bancroft_pkg: constants and types shared by the compressor, the decompressor
// and the example filter kernel.
//
// Bases are 2-bit codes A=00, C=01, G=10, T=11 (this code is a local choice;
// it makes the complement of a base its bitwise NOT). A sequence packed into a
// vector holds its first base in bits [1:0]. The k-mer width K=64 and the stride
// S=16 are the prototype values; a stride of 16 bases is one 32-bit word, the
// same width as a reference index, so every field of the compressed format is a
// 32-bit word. The header of a chunk carries sixteen 2-bit element codes.
package bancroft_pkg;

  localparam int unsigned K_BASES      = 64;           // k-mer length
  localparam int unsigned S_BASES      = 16;           // stride length
  localparam int unsigned KMER_W       = 2 * K_BASES;  // 128
  localparam int unsigned STRIDE_W     = 2 * S_BASES;  // 32
  localparam int unsigned WORD_W       = 32;           // every field of the format
  localparam int unsigned HDR_FIELDS   = 16;           // elements per chunk
  localparam int unsigned BUS_W        = 512;          // decompressor data bus
  localparam int unsigned BUS_BASES    = BUS_W / 2;    // 256 bases per beat
  localparam int unsigned HASH_W       = 32;

  typedef logic [1:0] base_t;

  // compressor: tag of a stride in flight (size of the reorder buffer)
  localparam int unsigned CTAG_W = 6;

  // one probabilistic-filter lookup, router -> filter memory controller
  typedef struct packed {
    logic [31:0]       idx;   // nibble index inside the PC (upper bits zero)
    logic [3:0]        nib;   // expected entry: str[3:0] of the (rc) k-mer
    logic [CTAG_W-1:0] tag;
    logic [1:0]        lane;  // which of the four hashes
  } flt_req_t;

  // filter lookup result, filter memory controller -> encoder
  typedef struct packed {
    logic [CTAG_W-1:0] tag;
    logic [1:0]        lane;
    logic              hit;
  } flt_rsp_t;

  // element codes of the grouped header
  typedef enum logic [1:0] {
    EL_VERBATIM = 2'b00,
    EL_FWD      = 2'b01,
    EL_REV      = 2'b10,
    EL_CONT     = 2'b11
  } elem_e;

  // reference read request from the decompressor parser: a run of up to four
  // k-mers that lie back to back in the reference
  typedef struct packed {
    logic [31:0] start;   // base offset of the lowest base of the span
    logic [2:0]  nkmer;   // 1..4 k-mers (span = 64*nkmer bases)
    logic        rc;      // reverse-complement the span
  } ref_req_t;

  // one piece of output, in element order, as seen by the shuffler
  typedef struct packed {
    logic       from_ref; // 1: reference span, 0: verbatim words
    logic [8:0] nbases;   // 16..256
    logic       last;     // last piece of the job
  } piece_t;

  // record sent to software for every stride shift
  typedef struct packed {
    logic        kmer_valid;       // the hashes and filter bits are meaningful
    logic [3:0]  filt_hit;         // 1: software must check this hash
    logic [31:0] hash3;            // Hash2 of the reverse complement
    logic [31:0] hash2;            // Hash1 of the reverse complement
    logic [31:0] hash1;            // Hash2 of the k-mer
    logic [31:0] hash0;            // Hash1 of the k-mer
    logic [31:0] stride;           // newest 16 bases
  } cmp_rec_t;

  function automatic logic [1:0] base_comp(input logic [1:0] b);
    return ~b;
  endfunction

endpackage
