// tb_pkg: reference models shared by the testbenches. They are written
// independently of the RTL (plain loops over bases and bytes) and define the
// contents of the simulated HBM: reference word w and filter-table entries
// are pseudo-random functions of their address, so no memory image is
// needed.
package tb_pkg;

  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] z;
    z = x + 32'h9e3779b9;
    z = (z ^ (z >> 16)) * 32'h7feb352d;
    z = (z ^ (z >> 15)) * 32'h846ca68b;
    return z ^ (z >> 16);
  endfunction

  // 512-bit reference word number w (256 bases)
  function automatic logic [511:0] ref_word(input logic [31:0] w);
    logic [511:0] r;
    for (int k = 0; k < 16; k++) r[32*k +: 32] = mix32(w * 16 + k);
    return r;
  endfunction

  // base b of the reference: bits of 32-bit piece (b >> 4) of the words above
  function automatic logic [1:0] ref_base(input logic [31:0] b);
    logic [31:0] v;
    v = mix32(b >> 4);
    return v[2*(b % 16) +: 2];
  endfunction

  // 256-bit filter-table word of pseudo channel pc
  function automatic logic [255:0] filt_word(input int pc, input logic [31:0] a);
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = mix32((a * 8 + k) ^ (32'(pc) << 27) ^ 32'h5a5a_0000);
    return r;
  endfunction

  function automatic logic [3:0] filt_nib(input int pc, input logic [31:0] idx);
    logic [255:0] w;
    w = filt_word(pc, idx >> 6);
    return w[4*(idx % 64) +: 4];
  endfunction

  function automatic logic [31:0] rotl32(input logic [31:0] x, input int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  // MurmurHash3_x86_32 over len bytes of key (byte i = key[8i+7:8i])
  function automatic logic [31:0] murmur3_x86_32(input logic [127:0] key, input int len, input logic [31:0] seed);
    logic [31:0] h, k;
    logic [7:0]  bytes [16];
    for (int i = 0; i < 16; i++) bytes[i] = key[8*i +: 8];
    h = seed;
    for (int blk = 0; blk < len / 4; blk++) begin
      k = {bytes[4*blk+3], bytes[4*blk+2], bytes[4*blk+1], bytes[4*blk]};
      k = k * 32'hcc9e2d51;
      k = rotl32(k, 15);
      k = k * 32'h1b873593;
      h = h ^ k;
      h = rotl32(h, 13);
      h = h * 5 + 32'he6546b64;
    end
    h = h ^ 32'(len);
    h = h ^ (h >> 16);
    h = h * 32'h85ebca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [127:0] rc64(input logic [127:0] s);
    logic [127:0] r;
    for (int i = 0; i < 64; i++) begin
      case (s[2*(63-i) +: 2])
        2'b00: r[2*i +: 2] = 2'b11;   // A -> T
        2'b01: r[2*i +: 2] = 2'b10;   // C -> G
        2'b10: r[2*i +: 2] = 2'b01;   // G -> C
        default: r[2*i +: 2] = 2'b00; // T -> A
      endcase
    end
    return r;
  endfunction

  function automatic logic [1:0] comp_base(input logic [1:0] b);
    case (b)
      2'b00: return 2'b11;
      2'b01: return 2'b10;
      2'b10: return 2'b01;
      default: return 2'b00;
    endcase
  endfunction

  // Builds one decompression job in the grouped-header format from random
  // elements: words gets the compressed stream, bases the expected output.
  // Reference offsets stay inside [0, rlim). Weights in percent: verbatim,
  // forward match, reverse match; the rest are continuations (only after a
  // match). job_bases is the total length minus a random cut < cut_max.
  function automatic void gen_job(input int nchunks, input longint rlim, input int cut_max,
                                  input int w_verb, input int w_fwd, input int w_rev,
                                  ref logic [31:0] words [$], ref logic [1:0] bases [$],
                                  output int job_bases);
    longint last_idx;
    bit rev, have_match;
    int total;
    total = 0;
    have_match = 0; rev = 0; last_idx = 0;
    for (int c = 0; c < nchunks; c++) begin
      logic [31:0] hdr;
      logic [31:0] pay [$];
      hdr = '0;
      for (int e = 0; e < 16; e++) begin
        int r;
        logic [1:0] code;
        r = $urandom % 100;
        if (r < w_verb) code = 2'b00;
        else if (r < w_verb + w_fwd) code = 2'b01;
        else if (r < w_verb + w_fwd + w_rev) code = 2'b10;
        else code = 2'b11;
        if (code == 2'b11) begin
          if (!have_match) code = 2'b00;
          else if (!rev && last_idx + 128 > rlim) code = 2'b00;
          else if (rev && last_idx < 64) code = 2'b00;
        end
        hdr[2*e +: 2] = code;
        case (code)
          2'b00: begin
            logic [31:0] v;
            v = $urandom;
            pay.push_back(v);
            for (int i = 0; i < 16; i++) bases.push_back(v[2*i +: 2]);
            total += 16;
          end
          2'b01, 2'b10: begin
            longint idx;
            idx = 64 * 4 + (longint'($urandom) % (rlim - 64 * 9));
            pay.push_back(32'(idx));
            rev = (code == 2'b10);
            for (int i = 0; i < 64; i++)
              bases.push_back(rev ? comp_base(ref_base(32'(idx + 63 - i))) : ref_base(32'(idx + i)));
            last_idx = idx; have_match = 1;
            total += 64;
          end
          default: begin
            longint idx;
            idx = rev ? last_idx - 64 : last_idx + 64;
            for (int i = 0; i < 64; i++)
              bases.push_back(rev ? comp_base(ref_base(32'(idx + 63 - i))) : ref_base(32'(idx + i)));
            last_idx = idx;
            total += 64;
          end
        endcase
      end
      words.push_back(hdr);
      foreach (pay[i]) words.push_back(pay[i]);
    end
    job_bases = total - ((cut_max > 0) ? ($urandom % cut_max) : 0);
    while (bases.size() > job_bases) void'(bases.pop_back());
  endfunction

  // Reference model of the shifted-Hamming-distance filter for a whole
  // read/reference pair: masks over the pair's positions (bases beyond
  // either end count as matches), amendment and count per window of NB
  // bases, window counts and the total saturated at 7.
  function automatic int shd_model(input int E, input int NB, input int am,
                               input logic [1:0] rd [$], input logic [1:0] rf [$]);
    int L, tot;
    L = rd.size();
    tot = 0;
    for (int w0 = 0; w0 < L; w0 += NB) begin
      int cnt;
      bit fin [];
      fin = new[NB];
      for (int i = 0; i < NB; i++) fin[i] = (w0 + i < L);
      for (int s = -E; s <= E; s++) begin
        bit m [], a [];
        m = new[NB]; a = new[NB];
        for (int i = 0; i < NB; i++) begin
          int g, j;
          g = w0 + i; j = g + s;
          m[i] = (g < L) && (j >= 0) && (j < L) && (rd[g] != rf[j]);
        end
        a = m;
        if (am[0]) for (int i = 1; i < NB - 1; i++) if (m[i-1] && !m[i] && m[i+1]) a[i] = 1;
        if (am[1]) for (int i = 1; i < NB - 2; i++) if (m[i-1] && !m[i] && !m[i+1] && m[i+2]) begin a[i] = 1; a[i+1] = 1; end
        for (int i = 0; i < NB; i++) fin[i] = fin[i] && a[i];
      end
      cnt = 0;
      for (int i = 0; i < NB; i++) cnt += fin[i];
      tot += (cnt > 7) ? 7 : cnt;
    end
    return (tot > 7) ? 7 : tot;
  endfunction

  // Software decompressor: rebuilds the bases of a compressed job.
  function automatic void decode_job(input logic [31:0] words [$], input int job_bases,
                                     ref logic [1:0] bases [$], output int n_cont);
    int p;
    longint last_idx;
    bit rev;
    p = 0; last_idx = 0; rev = 0; n_cont = 0;
    bases.delete();
    while (bases.size() < job_bases && p < words.size()) begin
      logic [31:0] hdr;
      hdr = words[p++];
      for (int e = 0; e < 16; e++) begin
        logic [1:0] code;
        code = hdr[2*e +: 2];
        if (code == 2'b00) begin
          for (int i = 0; i < 16; i++) bases.push_back(words[p][2*i +: 2]);
          p++;
        end else begin
          if (code == 2'b11) begin
            last_idx = rev ? last_idx - 64 : last_idx + 64;
            n_cont++;
          end else begin
            last_idx = longint'(words[p++]);
            rev = (code == 2'b10);
          end
          for (int i = 0; i < 64; i++)
            bases.push_back(rev ? comp_base(ref_base(32'(last_idx + 63 - i))) : ref_base(32'(last_idx + i)));
        end
      end
    end
    while (bases.size() > job_bases) void'(bases.pop_back());
  endfunction

endpackage
