// conv_engine: one output value of the folded convolution per clock.
//
// The convolution, batch normalization and forward PCA of a layer are one linear
// map, so one KxKxC_IN dot product of the unsigned 8-bit input window with a
// signed 8-bit folded filter, plus the folded bias, gives one PCA coefficient of
// one output pixel. The engine has NEL = K*K*C_IN multipliers and an adder tree,
// and computes a new coefficient every clock, which matches the reference design's
// rate of one pixel of one output feature per clock.
//
// Timing: inputs are sampled when en=1 and in_valid=1; acc/out_valid appear one
// clock later. en=0 freezes the stage (pipeline stall). The window layout is the
// same as the filter layout: element ((ky*K)+kx)*C_IN + c.
module conv_engine #(
  parameter int unsigned K    = 3,
  parameter int unsigned C_IN = 64,
  localparam int unsigned NEL = K * K * C_IN
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              en,
  input  logic                              in_valid,
  input  logic [NEL*fmtc_pkg::ACT_W-1:0]    window,
  input  logic [NEL*fmtc_pkg::WGT_W-1:0]    filt,
  input  logic signed [fmtc_pkg::ACC_W-1:0] bias,
  output logic                              out_valid,
  output logic signed [fmtc_pkg::ACC_W-1:0] acc
);
  import fmtc_pkg::*;

  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = bias;
    for (int i = 0; i < NEL; i++) begin
      sum += $signed({{(ACC_W-ACT_W){1'b0}}, window[i*ACT_W +: ACT_W]})
           * ACC_W'($signed(filt[i*WGT_W +: WGT_W]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc       <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      if (in_valid) acc <= sum;
    end
  end
endmodule
