// tb_relu_requant: random reconstructed values (negative, in range and above
// full scale) against the reference ReLU + rounding requantizer; checks flags
// and that the tag travels with the value.
module tb_relu_requant;
  import fmtc_tb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, relu0, sat;
  logic [5:0] in_tag, out_tag;
  logic signed [47:0] x;
  logic [15:0] omul;
  logic [5:0] oshift;
  logic [7:0] a;
  int checks = 0, failures = 0, n0 = 0, nsat = 0;

  relu_requant #(.TAG_W(6)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    x = 0; omul = 0; oshift = 0; in_tag = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      x      = 48'($signed($urandom_range(2000000, 0)) - 700000);
      omul   = 16'($urandom_range(65535, 1));
      oshift = 6'($urandom_range(30, 14));
      in_tag = 6'($urandom);
      in_valid = 1;
      e = act_ref(longint'(x), omul, oshift);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(a) != e || out_tag != in_tag) begin
        failures++; $display("FAIL x=%0d omul=%0d sh=%0d got %0d exp %0d", x, omul, oshift, a, e);
      end
      if (relu0) n0++;
      if (sat) nsat++;
    end
    checks++;
    if (n0 == 0 || nsat == 0) begin failures++; $display("FAIL clamp cases not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
