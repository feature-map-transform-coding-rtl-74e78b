// fmtc_tb_pkg: reference arithmetic and a canonical Huffman codebook for the
// testbenches of the feature-map transform-coding layer.
//
// The codebook gives short code words to levels near zero, as the quantized PCA
// coefficients of a real layer are concentrated there. Levels are ranked
// 0, -1, +1, -2, +2, ... (optionally with a random shuffle inside groups of
// equal length), and rank r gets a length from the profile below; the canonical
// code is then assigned in rank order. All reference arithmetic is written here
// from the formulas in the block headers, independently of the RTL.
package fmtc_tb_pkg;

  int unsigned code_len  [256];   // by symbol (8-bit pattern)
  int unsigned code_word [256];
  int unsigned sym_of_idx[256];
  int unsigned first_c   [1:16];
  int unsigned count_c   [1:16];
  int unsigned base_c    [1:16];

  // length of rank r: 1 bit for rank 0, then groups of 2,4,8,... at 3,5,7,... bits
  function automatic int unsigned rank_len(int unsigned r);
    if (r == 0)   return 1;
    if (r <= 2)   return 3;
    if (r <= 6)   return 5;
    if (r <= 14)  return 7;
    if (r <= 30)  return 9;
    if (r <= 62)  return 11;
    if (r <= 126) return 13;
    return 15;
  endfunction

  function automatic int unsigned sym_of_rank(int unsigned r);
    int lvl;
    lvl = (r % 2 == 1) ? -int'((r + 1) / 2) : int'(r / 2);
    if (r == 255) lvl = -128;
    return int'(lvl) & 8'hff;
  endfunction

  function automatic void build_code(bit shuffle);
    int unsigned code, prev;
    for (int r = 0; r < 256; r++) sym_of_idx[r] = sym_of_rank(r);
    if (shuffle) begin
      for (int r = 255; r > 0; r--) begin
        int unsigned j, t;
        j = $urandom_range(r, 0);
        if (rank_len(j) == rank_len(r)) begin
          t = sym_of_idx[r]; sym_of_idx[r] = sym_of_idx[j]; sym_of_idx[j] = t;
        end
      end
    end
    for (int l = 1; l <= 16; l++) begin count_c[l] = 0; base_c[l] = 0; end
    for (int r = 0; r < 256; r++) count_c[rank_len(r)]++;
    code = 0; prev = 0;
    for (int l = 1; l <= 16; l++) begin
      code = (code + prev) << 1;
      if (l == 1) code = 0;
      first_c[l] = code;
      prev = count_c[l];
    end
    begin
      int unsigned idx = 0;
      for (int l = 1; l <= 16; l++) begin base_c[l] = idx; idx += count_c[l]; end
    end
    for (int r = 0; r < 256; r++) begin
      int unsigned l = rank_len(r);
      code_len[sym_of_idx[r]]  = l;
      code_word[sym_of_idx[r]] = first_c[l] + (r - base_c[l]);
    end
  endfunction

  // bit-serial packer used as the reference for the encoder's output
  typedef struct { bit q[$]; } bitq_t;

  function automatic void push_code(ref bit q[$], input int unsigned sym);
    int unsigned l = code_len[sym & 8'hff];
    int unsigned c = code_word[sym & 8'hff];
    for (int i = int'(l) - 1; i >= 0; i--) q.push_back(c[i]);
  endfunction

  // words of 64 bits, first bit in bit 63, last word zero padded
  function automatic void pack_words(ref bit q[$], ref longint unsigned w[$]);
    w.delete();
    for (int i = 0; i < q.size(); i += 64) begin
      longint unsigned v = 0;
      for (int b = 0; b < 64; b++) v[63-b] = (i + b < q.size()) ? q[i+b] : 1'b0;
      w.push_back(v);
    end
  endfunction

  function automatic longint round_shift(longint v, int unsigned s);
    longint half = (s == 0) ? 0 : (longint'(1) << (s - 1));
    return (v + half) >>> s;
  endfunction

  function automatic int quant_ref(longint acc, int unsigned qmul, int unsigned qshift);
    longint s = round_shift(acc * longint'(qmul), qshift);
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  function automatic int act_ref(longint x, int unsigned omul, int unsigned oshift);
    longint s = round_shift(x * longint'(omul), oshift);
    if (s < 0) return 0;
    if (s > 255) return 255;
    return int'(s);
  endfunction

  // a level drawn mostly near zero, with occasional large values
  function automatic int rand_level();
    int unsigned u = $urandom_range(99, 0);
    if (u < 50) return 0;
    if (u < 80) return $urandom_range(2, 0) - 1;
    if (u < 95) return $urandom_range(16, 0) - 8;
    return $urandom_range(255, 0) - 128;
  endfunction

endpackage
