// tb_quantizer: random accumulators, step reciprocals and shifts against the
// reference rounding quantizer, with saturating cases; checks the hold on en=0.
module tb_quantizer;
  import fmtc_tb_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid, sat;
  logic signed [31:0] acc;
  logic [15:0] qmul;
  logic [5:0] qshift;
  logic signed [7:0] level;
  int checks = 0, failures = 0, nsat = 0;

  quantizer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    longint es;
    acc = 0; qmul = 0; qshift = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      acc    = (t % 3 == 0) ? 32'($signed($urandom_range(4000, 0)) - 2000) : $urandom;
      qmul   = 16'($urandom);
      qshift = 6'($urandom_range(40, 0));
      if (t % 3 == 0) begin qmul = 16'($urandom_range(4096, 1)); qshift = 6'($urandom_range(16, 8)); end
      in_valid = 1; en = 1;
      e = quant_ref(longint'(acc), qmul, qshift);
      @(negedge clk);
      in_valid = 0;
      checks++;
      es = round_shift(longint'(acc) * longint'(qmul), qshift);
      if (!out_valid || int'(level) != e || sat != (es > 127 || es < -128)) begin
        failures++; $display("FAIL acc=%0d qmul=%0d sh=%0d got %0d exp %0d", acc, qmul, qshift, level, e);
      end
      if (sat) nsat++;
      en = 0; in_valid = 1; acc = ~acc;
      @(negedge clk);
      checks++;
      if (int'(level) != e) begin failures++; $display("FAIL hold"); end
      en = 1; in_valid = 0;
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
