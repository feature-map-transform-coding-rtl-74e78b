// tb_weight_mem: loads random weights and biases element by element and reads
// every filter back, comparing all weights and the bias.
module tb_weight_mem;
  localparam int K = 3, CI = 2, CO = 4, NEL = K * K * CI;
  logic clk = 0, w_we = 0, b_we = 0, re = 0;
  logic [1:0] w_filt, b_filt, raddr;
  logic [4:0] w_elem;
  logic signed [7:0] w_data;
  logic signed [31:0] b_data, rbias;
  logic [NEL*8-1:0] rfilt;
  int checks = 0, failures = 0;
  byte wref [CO][NEL];
  int  bref [CO];

  weight_mem #(.K(K), .C_IN(CI), .C_OUT(CO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 3; round++) begin
      for (int f = 0; f < CO; f++) begin
        for (int e = 0; e < NEL; e++) begin
          @(negedge clk); w_we = 1; w_filt = 2'(f); w_elem = 5'(e);
          w_data = 8'($urandom); wref[f][e] = w_data;
        end
        @(negedge clk); w_we = 0; b_we = 1; b_filt = 2'(f); b_data = $urandom; bref[f] = b_data;
        @(negedge clk); b_we = 0;
      end
      for (int f = CO - 1; f >= 0; f--) begin
        @(negedge clk); re = 1; raddr = 2'(f);
        @(negedge clk); re = 0;
        for (int e = 0; e < NEL; e++) begin
          checks++;
          if ($signed(rfilt[e*8 +: 8]) != wref[f][e]) begin
            failures++; $display("FAIL f%0d e%0d", f, e);
          end
        end
        checks++;
        if (rbias != bref[f]) begin failures++; $display("FAIL bias f%0d", f); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
