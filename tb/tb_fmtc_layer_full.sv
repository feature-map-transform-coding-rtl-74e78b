// tb_fmtc_layer_full: end-to-end test of the layer at its default size, the
// 56x56, 64-in/64-out 3x3 layer of the reference design (two layers run back to
// back, about 0.8 M clocks); see fmtc_layer_tb_body.svh.
module tb_fmtc_layer_full;
  localparam int H = 56, W = 56, K = 3, CI = 64, CO = 64;
  localparam int STALL_PCT = 5, PERIOD = 20000, BURST = 60;
  localparam int WATCHDOG = 3000000;
  `include "fmtc_layer_tb_body.svh"

  fmtc_layer dut (.*);
endmodule
