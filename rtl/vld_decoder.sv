// vld_decoder: Huffman variable-length decoder, one quantized level per clock.
//
// The decoder reads the packed code stream word by word (valid/ready) into a
// 2*MEM_W-bit, left-aligned bit buffer and decodes one code word per clock. The
// code must be canonical: code words of one length are consecutive integers, and
// for each length L the table holds first[L] (first code word of that length),
// count[L] (how many) and base[L] (index of its first symbol in the symbol table).
// All MAX_LEN lengths are compared in parallel against the top bits of the buffer;
// the shortest length L with first[L] <= code < first[L]+count[L] is the match, its
// symbol is sym[base[L] + code - first[L]]. Canonical codes and the parallel
// comparison are this implementation's choices; the paper only says that a
// variable length decoder restores the quantized levels.
//
// `start` loads the number of symbols to decode and empties the buffer. A code
// word is decoded when at least MAX_LEN bits are buffered, or when `in_done` says
// the stream has no more words (the tail is then zero padding). The decoded symbol
// appears on out_* one clock after its code word leaves the buffer; there is no
// back-pressure on the output. `err` is set if no length matches.
module vld_decoder (
  input  logic                         clk,
  input  logic                         rst_n,
  // canonical code tables
  input  logic                         lt_we,
  input  logic [fmtc_pkg::LEN_W-1:0]   lt_len,
  input  logic [fmtc_pkg::MAX_LEN-1:0] lt_first,
  input  logic [fmtc_pkg::LVL_W:0]     lt_count,
  input  logic [fmtc_pkg::LVL_W-1:0]   lt_base,
  input  logic                         st_we,
  input  logic [fmtc_pkg::LVL_W-1:0]   st_idx,
  input  logic [fmtc_pkg::LVL_W-1:0]   st_sym,
  // control
  input  logic                         start,
  input  logic [31:0]                  nsym,
  // packed words
  input  logic                         in_valid,
  input  logic [fmtc_pkg::MEM_W-1:0]   in_data,
  output logic                         in_ready,
  input  logic                         in_done,
  // decoded symbols
  output logic                         out_valid,
  output logic [fmtc_pkg::LVL_W-1:0]   out_sym,
  output logic                         busy,
  output logic                         err
);
  import fmtc_pkg::*;

  localparam int unsigned BUF_W  = 2 * MEM_W;
  localparam int unsigned FILL_W = $clog2(BUF_W + 1);

  logic [MAX_LEN-1:0] first_t [1:MAX_LEN];
  logic [LVL_W:0]     count_t [1:MAX_LEN];
  logic [LVL_W-1:0]   base_t  [1:MAX_LEN];
  logic [LVL_W-1:0]   sym_t   [NSYM];

  logic [BUF_W-1:0]  buf_q;
  logic [FILL_W-1:0] fill_q;
  logic [31:0]       remain;

  always_ff @(posedge clk) begin
    if (lt_we && lt_len != 0 && int'(lt_len) <= MAX_LEN) begin
      first_t[lt_len] <= lt_first;
      count_t[lt_len] <= lt_count;
      base_t[lt_len]  <= lt_base;
    end
    if (st_we) sym_t[st_idx] <= st_sym;
  end

  // parallel match of all code lengths
  logic [MAX_LEN-1:0] top;
  logic               hit;
  logic [LEN_W-1:0]   hit_len;
  logic [LVL_W-1:0]   hit_idx;
  logic               can_dec, dec;

  always_comb begin
    logic [MAX_LEN-1:0] c, off;
    top     = buf_q[BUF_W-1 -: MAX_LEN];
    hit     = 1'b0;
    hit_len = '0;
    hit_idx = '0;
    for (int l = MAX_LEN; l >= 1; l--) begin
      c   = top >> (MAX_LEN - l);
      off = c - first_t[l];
      if (c >= first_t[l] && {1'b0, off} < {{(MAX_LEN-LVL_W){1'b0}}, count_t[l]}) begin
        hit     = 1'b1;
        hit_len = LEN_W'(l);
        hit_idx = base_t[l] + LVL_W'(off);
      end
    end
  end

  assign can_dec = (remain != 0) && (int'(fill_q) >= int'(MAX_LEN) || (in_done && fill_q != '0));
  assign dec     = can_dec && hit;
  assign busy    = (remain != 0);

  logic [BUF_W-1:0]  buf_s, buf_n;
  logic [FILL_W-1:0] fill_s, fill_n;

  always_comb begin
    buf_s    = dec ? (buf_q << hit_len) : buf_q;
    fill_s   = dec ? ((fill_q > FILL_W'(hit_len)) ? fill_q - FILL_W'(hit_len) : '0) : fill_q;
    in_ready = (int'(fill_s) <= int'(MEM_W)) && !start;
    buf_n    = buf_s;
    fill_n   = fill_s;
    if (in_valid && in_ready) begin
      buf_n  = buf_s | ({in_data, {MEM_W{1'b0}}} >> fill_s);
      fill_n = fill_s + FILL_W'(MEM_W);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      fill_q    <= '0;
      remain    <= '0;
      out_valid <= 1'b0;
      err       <= 1'b0;
    end else if (start) begin
      buf_q     <= '0;
      fill_q    <= '0;
      remain    <= nsym;
      out_valid <= 1'b0;
      err       <= 1'b0;
    end else begin
      buf_q     <= buf_n;
      fill_q    <= fill_n;
      out_valid <= dec;
      if (dec) remain <= remain - 1;
      if (can_dec && !hit) err <= 1'b1;
    end
  end

  // symbol table, registered read
  always_ff @(posedge clk) begin
    if (dec) out_sym <= sym_t[hit_idx];
  end
endmodule
