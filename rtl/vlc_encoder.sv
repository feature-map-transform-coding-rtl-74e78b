// vlc_encoder: Huffman variable-length coder of the quantized PCA levels.
//
// Each quantized level (an LVL_W-bit two's-complement symbol) is looked up in a
// codebook RAM of 2^LVL_W entries {code, length}; the code words are then packed,
// first bit first, into MEM_W-bit words for external memory. The codebook is
// computed offline from calibration data and written through the table port; any
// prefix-free code with words of 1..MAX_LEN bits can be loaded (the paper uses
// Huffman codes; the length limit is this implementation's choice).
//
// Packing: a 2*MEM_W-bit buffer holds `fill` valid bits, left-aligned. A full top
// word is offered on out_* (valid/ready). `ready` is high while a longest code
// still fits whatever the memory does, and is used as the stall enable of the
// whole compute pipeline: with en=0 no stage of the encoder advances. `flush`
// makes a last, zero-padded partial word once no symbol is left in flight.
// Latency: a symbol accepted with en=1 enters the buffer two clocks later.
// `bits` counts coded bits since `clear`, the compressed size of the layer.
module vlc_encoder (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  // codebook load
  input  logic                               tab_we,
  input  logic [fmtc_pkg::LVL_W-1:0]         tab_sym,
  input  logic [fmtc_pkg::MAX_LEN-1:0]       tab_code,
  input  logic [fmtc_pkg::LEN_W-1:0]         tab_len,
  // symbol input
  input  logic                               en,
  input  logic                               in_valid,
  input  logic [fmtc_pkg::LVL_W-1:0]         in_sym,
  output logic                               ready,
  input  logic                               flush,
  // packed words
  output logic                               out_valid,
  output logic [fmtc_pkg::MEM_W-1:0]         out_data,
  input  logic                               out_ready,
  output logic                               empty,
  output logic [31:0]                        bits
);
  import fmtc_pkg::*;

  localparam int unsigned BUF_W  = 2 * MEM_W;
  localparam int unsigned FILL_W = $clog2(BUF_W + 1);

  logic [MAX_LEN-1:0] code_mem [NSYM];
  logic [LEN_W-1:0]   len_mem  [NSYM];

  logic               s1_valid;
  logic [MAX_LEN-1:0] s1_code;
  logic [LEN_W-1:0]   s1_len;

  logic [BUF_W-1:0]  buf_q;
  logic [FILL_W-1:0] fill_q;

  // table RAM with a registered read (stage 1)
  always_ff @(posedge clk) begin
    if (tab_we) begin
      code_mem[tab_sym] <= tab_code;
      len_mem[tab_sym]  <= tab_len;
    end
    if (en && in_valid) begin
      s1_code <= code_mem[in_sym];
      s1_len  <= len_mem[in_sym];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     s1_valid <= 1'b0;
    else if (clear) s1_valid <= 1'b0;
    else if (en)    s1_valid <= in_valid;
  end

  assign ready     = (int'(fill_q) <= int'(BUF_W - MAX_LEN));
  assign out_data  = buf_q[BUF_W-1 -: MEM_W];
  assign out_valid = (int'(fill_q) >= int'(MEM_W)) || (flush && !s1_valid && fill_q != '0);
  assign empty     = !s1_valid && (fill_q == '0);

  // stage 2: pop a word and/or append a code word
  logic              pop, push;
  logic [BUF_W-1:0]  buf_pop, code_ext, buf_n;
  logic [FILL_W-1:0] fill_pop, fill_n;
  logic [MAX_LEN-1:0] code_m;

  always_comb begin
    pop      = out_valid && out_ready;
    push     = en && s1_valid;
    buf_pop  = pop ? (buf_q << MEM_W) : buf_q;
    fill_pop = !pop ? fill_q : (int'(fill_q) >= int'(MEM_W)) ? FILL_W'(fill_q - FILL_W'(MEM_W)) : '0;
    code_m   = s1_code & MAX_LEN'((32'd1 << s1_len) - 1);
    code_ext = {{(BUF_W-MAX_LEN){1'b0}}, code_m};
    buf_n    = buf_pop;
    fill_n   = fill_pop;
    if (push) begin
      buf_n  = buf_pop | (code_ext << (BUF_W - int'(fill_pop) - int'(s1_len)));
      fill_n = fill_pop + FILL_W'(s1_len);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      fill_q <= '0;
      bits   <= '0;
    end else if (clear) begin
      buf_q  <= '0;
      fill_q <= '0;
      bits   <= '0;
    end else begin
      buf_q  <= buf_n;
      fill_q <= fill_n;
      if (push) bits <= bits + 32'(s1_len);
    end
  end

`ifndef SYNTHESIS
  a_len:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (s1_len != 0 && int'(s1_len) <= MAX_LEN));
  a_ovf:  assert property (@(posedge clk) disable iff (!rst_n) int'(fill_q) <= BUF_W);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready && !flush |=> out_valid && $stable(out_data));
`endif
endmodule
