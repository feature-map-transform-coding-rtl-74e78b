// tb_vlc_encoder: loads a canonical Huffman codebook, encodes a random stream of
// levels (mostly near zero, some extreme) with random stalls of the memory side,
// and compares the packed words and the bit count with a bit-serial reference
// packer. Also checks that the encoder stops accepting when its buffer is full.
module tb_vlc_encoder;
  import fmtc_tb_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  logic tab_we = 0;
  logic [7:0] tab_sym;
  logic [15:0] tab_code;
  logic [4:0] tab_len;
  logic en, in_valid = 0;
  logic [7:0] in_sym;
  logic ready, flush = 0, out_valid, out_ready = 0, empty;
  logic [63:0] out_data;
  logic [31:0] bits;
  int checks = 0, failures = 0, stalls = 0;
  bit refq[$];
  longint unsigned refw[$], got[$];
  int total_bits;

  vlc_encoder dut (.*);
  assign en = ready;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory side: random ready, collect words
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_data);
  int cyc = 0;
  always @(negedge clk) begin
    cyc++;
    out_ready <= ($urandom_range(3, 0) != 0) && (cyc % 200 > 60);
  end

  initial begin
    build_code(1'b1);
    in_sym = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 256; s++) begin
      @(negedge clk); tab_we = 1; tab_sym = 8'(s); tab_code = 16'(code_word[s]); tab_len = 5'(code_len[s]);
    end
    @(negedge clk); tab_we = 0;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      got.delete(); refq.delete(); total_bits = 0;
      for (int n = 0; n < 3000; ) begin
        automatic int lv = (run == 2) ? ($urandom_range(255, 0) - 128) : rand_level();
        in_valid = ($urandom_range(4, 0) != 0);
        in_sym = 8'(lv);
        @(posedge clk);
        if (!ready) stalls++;
        if (ready && in_valid) begin
          push_code(refq, in_sym); total_bits += code_len[in_sym]; n++;
        end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (4) @(negedge clk);
      flush = 1;
      while (!empty) @(negedge clk);
      flush = 0;
      @(negedge clk);
      pack_words(refq, refw);
      checks++;
      if (got.size() != refw.size()) begin
        failures++; $display("FAIL run %0d: %0d words, expected %0d", run, got.size(), refw.size());
      end
      for (int i = 0; i < refw.size() && i < got.size(); i++) begin
        checks++;
        if (got[i] != refw[i]) begin
          failures++; if (failures < 10) $display("FAIL word %0d got %h exp %h", i, got[i], refw[i]);
        end
      end
      checks++;
      if (int'(bits) != total_bits) begin failures++; $display("FAIL bits %0d exp %0d", bits, total_bits); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL encoder never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
