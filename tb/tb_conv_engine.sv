// tb_conv_engine: random windows, filters and biases (including extreme values)
// against a reference dot product; also checks that en=0 holds the result.
module tb_conv_engine;
  localparam int K = 3, CI = 4, NEL = K * K * CI;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  logic [NEL*8-1:0] window, filt;
  logic signed [31:0] bias, acc;
  int checks = 0, failures = 0;

  conv_engine #(.K(K), .C_IN(CI)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v;
    window = '0; filt = '0; bias = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      exp_v = 0;
      for (int i = 0; i < NEL; i++) begin
        automatic byte unsigned a = (t % 4 == 0) ? 8'd255 : 8'($urandom);
        automatic byte          w = (t % 4 == 0) ? -8'sd128 : (t % 4 == 1) ? 8'sd127 : 8'($urandom);
        window[i*8 +: 8] = a;
        filt[i*8 +: 8]   = w;
        exp_v += longint'(a) * longint'(w);
      end
      bias = $urandom; exp_v += longint'(bias);
      in_valid = 1; en = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || acc != 32'(exp_v)) begin
        failures++; $display("FAIL t=%0d got %0d exp %0d", t, acc, exp_v);
      end
      // stall: new inputs must not be taken while en=0
      en = 0; in_valid = 1; window = ~window;
      @(negedge clk);
      checks++;
      if (acc != 32'(exp_v)) begin failures++; $display("FAIL hold t=%0d", t); end
      en = 1; in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
