// tb_vld_decoder: builds a reference bit stream from random levels with a
// canonical Huffman codebook, feeds its 64-bit words with random gaps, and
// checks every decoded level, the count, and the error flag.
module tb_vld_decoder;
  import fmtc_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lt_we = 0, st_we = 0;
  logic [4:0] lt_len;
  logic [15:0] lt_first;
  logic [8:0] lt_count;
  logic [7:0] lt_base, st_idx, st_sym;
  logic start = 0;
  logic [31:0] nsym;
  logic in_valid = 0, in_ready, in_done = 0;
  logic [63:0] in_data;
  logic out_valid, busy, err;
  logic [7:0] out_sym;
  int checks = 0, failures = 0;
  int syms[$];
  bit q[$];
  longint unsigned words[$];
  int nout;

  vld_decoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (nout >= syms.size() || out_sym != 8'(syms[nout])) begin
      failures++;
      if (failures < 10) $display("FAIL sym %0d got %0d exp %0d", nout, $signed(out_sym), syms[nout]);
    end
    nout++;
  end

  initial begin
    nsym = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      build_code(run != 0);
      for (int l = 1; l <= 16; l++) begin
        @(negedge clk); lt_we = 1; lt_len = 5'(l); lt_first = 16'(first_c[l]);
        lt_count = 9'(count_c[l]); lt_base = 8'(base_c[l]);
      end
      for (int i = 0; i < 256; i++) begin
        @(negedge clk); lt_we = 0; st_we = 1; st_idx = 8'(i); st_sym = 8'(sym_of_idx[i]);
      end
      @(negedge clk); st_we = 0;
      syms.delete(); q.delete();
      for (int n = 0; n < 2000 + run * 7; n++) begin
        automatic int lv = (run == 2) ? ($urandom_range(255, 0) - 128) : rand_level();
        syms.push_back(lv); push_code(q, lv & 8'hff);
      end
      pack_words(q, words);
      nout = 0;
      @(negedge clk); start = 1; nsym = syms.size(); in_done = 0;
      @(negedge clk); start = 0;
      for (int w = 0; w < words.size(); ) begin
        in_valid = ($urandom_range(2, 0) != 0);
        in_data  = words[w];
        @(posedge clk);
        if (in_valid && in_ready) w++;
        @(negedge clk);
      end
      in_valid = 0; in_done = 1;
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (nout != syms.size() || err) begin
        failures++; $display("FAIL run %0d decoded %0d of %0d, err=%0d", run, nout, syms.size(), err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
