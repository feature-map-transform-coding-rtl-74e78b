// tb_input_cache: writes a small feature map one activation at a time in
// random order and reads every pixel word back, checking each byte lane and
// that the read data holds while no read is issued.
module tb_input_cache;
  localparam int H = 4, W = 5, C = 3, NPIX = H * W;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] waddr, raddr;
  logic [1:0] wch;
  logic [7:0] wdata;
  logic [C*8-1:0] rdata;
  int checks = 0, failures = 0;
  byte unsigned ref_m [NPIX][C];

  input_cache #(.H(H), .W(W), .C_IN(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < NPIX * C; i++) begin
        automatic int p = $urandom_range(NPIX - 1, 0), c = $urandom_range(C - 1, 0);
        automatic byte unsigned v = byte'($urandom);
        @(negedge clk); we = 1; waddr = 5'(p); wch = 2'(c); wdata = v; ref_m[p][c] = v;
      end
      // make every entry defined
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < C; c++) begin
        automatic byte unsigned v = byte'($urandom);
        @(negedge clk); we = 1; waddr = 5'(p); wch = 2'(c); wdata = v; ref_m[p][c] = v;
      end
      @(negedge clk); we = 0;
      for (int p = NPIX - 1; p >= 0; p--) begin
        @(negedge clk); re = 1; raddr = 5'(p);
        @(negedge clk); re = 0; raddr = 5'($urandom_range(NPIX - 1, 0));
        for (int k = 0; k < 2; k++) begin
          for (int c = 0; c < C; c++) begin
            checks++;
            if (rdata[c*8 +: 8] !== ref_m[p][c]) begin
              failures++;
              $display("FAIL pixel %0d ch %0d got %0h exp %0h", p, c, rdata[c*8 +: 8], ref_m[p][c]);
            end
          end
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
