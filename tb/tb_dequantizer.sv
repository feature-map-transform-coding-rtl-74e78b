// tb_dequantizer: every level times random steps against level*step.
module tb_dequantizer;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] level;
  logic [15:0] deq;
  logic signed [23:0] y;
  int checks = 0, failures = 0;

  dequantizer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    level = 0; deq = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1024; t++) begin
      @(negedge clk);
      level = 8'(t); deq = (t < 256) ? 16'hffff : 16'($urandom);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || longint'(y) != longint'(level) * longint'(deq)) begin
        failures++; $display("FAIL level=%0d deq=%0d got %0d", level, deq, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
