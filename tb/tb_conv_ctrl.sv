// tb_conv_ctrl: runs the sequencer over a 4x5 map with a model input cache.
// Checks the filter order (C_OUT filters per pixel, pixels row-major), that the
// window presented with each filter is the zero-padded 3x3 neighbourhood of the
// right pixel, and the layer length of (H*W+1)*SLOT clocks without stalls; a
// second run stalls `en` at random and must give the same sequence.
module tb_conv_ctrl;
  localparam int H = 4, W = 5, K = 3, CI = 2, CO = 12, NPIX = H * W, NEL = K * K * CI;
  localparam int SLOT = (CO > K * K + 1) ? CO : K * K + 1;
  logic clk = 0, rst_n = 0, start = 0, en = 1;
  logic cache_re, w_re, mac_valid, busy, done;
  logic [4:0] cache_raddr;
  logic [CI*8-1:0] cache_rdata;
  logic [3:0] w_raddr;
  logic [NEL*8-1:0] window;
  int checks = 0, failures = 0;
  byte unsigned img [NPIX][CI];
  int issued, consumed, last_f;
  bit f_pend;
  int f_q[$];

  conv_ctrl #(.H(H), .W(W), .K(K), .C_IN(CI), .C_OUT(CO)) dut (.*);
  always #5 clk = ~clk;

  // model of the input cache (synchronous read)
  always @(posedge clk) if (cache_re) begin
    for (int c = 0; c < CI; c++) cache_rdata[c*8 +: 8] <= img[cache_raddr][c];
  end

  function automatic logic [NEL*8-1:0] ref_window(int p);
    logic [NEL*8-1:0] w;
    int y0 = p / W, x0 = p % W;
    for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) for (int c = 0; c < CI; c++) begin
      int yy = y0 + ky - 1, xx = x0 + kx - 1;
      w[((ky*K+kx)*CI + c)*8 +: 8] = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? img[yy*W+xx][c] : 8'd0;
    end
    return w;
  endfunction

  always @(posedge clk) if (rst_n && en) begin
    if (mac_valid) begin
      int p, f;
      p = consumed / CO; f = consumed % CO;
      checks++;
      if (f_q.size() == 0 || f_q[0] != f || window != ref_window(p)) begin
        failures++;
        if (failures < 10) $display("FAIL value %0d (pixel %0d filter %0d)", consumed, p, f);
      end
      if (f_q.size() != 0) void'(f_q.pop_front());
      consumed++;
    end
    if (w_re) begin f_q.push_back(int'(w_raddr)); issued++; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    for (int p = 0; p < NPIX; p++) for (int c = 0; c < CI; c++) img[p][c] = byte'($urandom_range(255, 1));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      issued = 0; consumed = 0; f_q.delete();
      @(negedge clk); start = 1; en = 1;
      @(negedge clk); start = 0;
      cycles = 0;
      while (!done) begin
        if (run == 1) en = ($urandom_range(2, 0) != 0);
        @(negedge clk);
        cycles++;
      end
      en = 1;
      repeat (3) @(negedge clk);
      checks++;
      if (consumed != NPIX * CO || issued != NPIX * CO) begin
        failures++; $display("FAIL run %0d: %0d issued, %0d consumed", run, issued, consumed);
      end
      if (run == 0) begin
        checks++;
        if (cycles != (NPIX + 1) * SLOT) begin
          failures++; $display("FAIL layer took %0d clocks, expected %0d", cycles, (NPIX + 1) * SLOT);
        end
      end
      // change the map for the second run
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < CI; c++) img[p][c] = byte'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
