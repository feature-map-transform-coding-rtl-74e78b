// tb_inv_pca: random 8x8 matrix and offsets; streams pixels of coefficients
// back-to-back and with gaps, and checks every reconstructed channel against
// x[c] = sum_k M[c][k]*y[k] + mu[c], its channel index and last flag.
module tb_inv_pca;
  localparam int C = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  logic m_we = 0, b_we = 0;
  logic [2:0] m_row, m_col, b_ch, out_ch;
  logic signed [7:0] m_data;
  logic signed [47:0] b_data, x;
  logic in_valid = 0;
  logic signed [23:0] y;
  logic out_valid, out_last;
  int checks = 0, failures = 0;
  int M [C][C];
  longint mu [C];
  longint expq[$];
  int nout = 0;

  inv_pca #(.C(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0 || x != expq[0] || int'(out_ch) != nout % C || out_last != (nout % C == C - 1)) begin
      failures++;
      if (failures < 10) $display("FAIL out %0d got %0d exp %0d ch %0d", nout, x, expq[0], out_ch);
    end
    if (expq.size() != 0) void'(expq.pop_front());
    nout++;
  end

  initial begin
    int yv [C];
    y = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < C; r++) for (int k = 0; k < C; k++) begin
      @(negedge clk); m_we = 1; m_row = 3'(r); m_col = 3'(k);
      m_data = (r == k && r == 0) ? -8'sd128 : 8'($urandom); M[r][k] = m_data;
    end
    @(negedge clk); m_we = 0;
    for (int c = 0; c < C; c++) begin
      @(negedge clk); b_we = 1; b_ch = 3'(c); b_data = 48'($signed($urandom)); mu[c] = b_data;
    end
    @(negedge clk); b_we = 0; clear = 1;
    @(negedge clk); clear = 0;
    for (int p = 0; p < 60; p++) begin
      for (int k = 0; k < C; k++) yv[k] = (p % 5 == 0) ? -8388608 : $signed($urandom) >>> 8;
      for (int c = 0; c < C; c++) begin
        automatic longint s = mu[c];
        for (int k = 0; k < C; k++) s += longint'(M[c][k]) * longint'(yv[k]);
        expq.push_back(s);
      end
      for (int k = 0; k < C; k++) begin
        // gaps only in odd pixels
        while ((p % 2 == 1) && $urandom_range(2, 0) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; y = 24'(yv[k]);
        @(negedge clk);
      end
      in_valid = 0;
    end
    repeat (C + 5) @(negedge clk);
    checks++;
    if (nout != 60 * C) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
