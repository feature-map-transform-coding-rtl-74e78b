// tb_layer_ctrl: walks the phase sequencer through two layers with a scripted
// environment and checks the phase order, the start pulses, the read and write
// addresses, the end of the read stream, the flush condition and the counters.
module tb_layer_ctrl;
  import fmtc_pkg::*;
  localparam int NPIX = 6, CI = 3;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic ld_we = 0, ld_last_ch = 0, conv_done = 0, pipe_empty = 1, enc_empty = 1;
  logic rd_fire = 0, wr_fire = 0;
  logic [2:0] ld_pix;
  logic [31:0] rd_addr, wr_addr, out_words, load_cycles, compute_cycles;
  logic rd_more, vld_start, conv_start, enc_flush, done;
  phase_e phase;
  int checks = 0, failures = 0;

  layer_ctrl #(.NPIX(NPIX), .C_IN(CI)) dut (.*);
  always #5 clk = ~clk;

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (phase %s)", what, phase.name()); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lc;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_true(phase == PH_IDLE && !done, "idle after reset");
    for (int layer = 0; layer < 2; layer++) begin
      cfg.in_base = 32'(100 + layer * 1000); cfg.in_words = 32'(5 + layer); cfg.out_base = 32'(5000 + layer);
      start = 1; @(negedge clk); start = 0;
      expect_true(phase == PH_LOAD && vld_start, "LOAD entered with vld_start");
      // read words
      for (int i = 0; i < 5 + layer; i++) begin
        expect_true(rd_more && rd_addr == cfg.in_base + 32'(i), "read address");
        rd_fire = 1; @(negedge clk); rd_fire = 0;
        expect_true(!vld_start, "vld_start is a pulse");
      end
      expect_true(!rd_more, "read stream ends after in_words");
      // cache writes
      lc = 0;
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < CI; c++) begin
        expect_true(int'(ld_pix) == p && phase == PH_LOAD, "load pixel count");
        ld_we = 1; ld_last_ch = (c == CI - 1); @(negedge clk); ld_we = 0; ld_last_ch = 0;
      end
      expect_true(phase == PH_COMPUTE && conv_start, "COMPUTE entered with conv_start");
      conv_done = 1;   // stale done of the previous layer must be ignored this clock
      @(negedge clk);
      expect_true(phase == PH_COMPUTE, "stale conv_done ignored");
      conv_done = 0;
      for (int i = 0; i < 4; i++) begin
        expect_true(wr_addr == cfg.out_base + 32'(i), "write address");
        wr_fire = 1; @(negedge clk); wr_fire = 0;
      end
      conv_done = 1; pipe_empty = 0; enc_empty = 0;
      @(negedge clk);
      expect_true(phase == PH_FLUSH && !enc_flush, "FLUSH waits for pipeline");
      pipe_empty = 1;
      @(negedge clk);
      expect_true(phase == PH_FLUSH && enc_flush, "flush once pipeline empty");
      wr_fire = 1; @(negedge clk); wr_fire = 0; enc_empty = 1;
      @(negedge clk);
      expect_true(phase == PH_DONE && done && out_words == 5, "DONE with word count");
      expect_true(load_cycles == 32'(5 + layer + NPIX * CI), "load clocks");
      expect_true(compute_cycles == 9, "compute clocks");
      @(negedge clk);
      expect_true(done, "DONE holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
