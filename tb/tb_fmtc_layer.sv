// tb_fmtc_layer: end-to-end test of the layer at a reduced size (6x5 map,
// 12 channels in and out, 3x3 kernel); see fmtc_layer_tb_body.svh.
module tb_fmtc_layer;
  localparam int H = 6, W = 5, K = 3, CI = 12, CO = 12;
  localparam int STALL_PCT = 20, PERIOD = 150, BURST = 40;
  localparam int WATCHDOG = 200000;
  `include "fmtc_layer_tb_body.svh"

  fmtc_layer #(.H(H), .W(W), .K(K), .C_IN(CI), .C_OUT(CO)) dut (.*);
endmodule
