// weight_mem: filters and biases of the current layer.
//
// Convolution, batch normalization and the forward PCA are folded offline into a
// single bank of C_OUT filters of KxKxC_IN signed 8-bit weights and one signed
// 32-bit bias per filter (the bias carries the BN shift and the PCA mean). The
// array is reloaded for every layer while the input feature map stays cached.
//
// Load port: one weight per clock, addressed by filter and element, where the
// element index is ((ky*K)+kx)*C_IN + c; one bias per clock by filter.
// Read port: synchronous; filter `raddr` appears on rfilt/rbias the clock after
// re=1, and holds while re=0.
// The weight layout and the load port are this implementation's choice.
module weight_mem #(
  parameter int unsigned K     = 3,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned C_OUT = 64,
  localparam int unsigned NEL  = K * K * C_IN,
  localparam int unsigned F_W  = (C_OUT > 1) ? $clog2(C_OUT) : 1,
  localparam int unsigned E_W  = (NEL > 1) ? $clog2(NEL) : 1
) (
  input  logic                              clk,
  input  logic                              w_we,
  input  logic [F_W-1:0]                    w_filt,
  input  logic [E_W-1:0]                    w_elem,
  input  logic signed [fmtc_pkg::WGT_W-1:0] w_data,
  input  logic                              b_we,
  input  logic [F_W-1:0]                    b_filt,
  input  logic signed [fmtc_pkg::ACC_W-1:0] b_data,
  input  logic                              re,
  input  logic [F_W-1:0]                    raddr,
  output logic [NEL*fmtc_pkg::WGT_W-1:0]    rfilt,
  output logic signed [fmtc_pkg::ACC_W-1:0] rbias
);
  import fmtc_pkg::*;

  logic [NEL*WGT_W-1:0]    wmem [C_OUT];
  logic signed [ACC_W-1:0] bmem [C_OUT];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_filt][w_elem*WGT_W +: WGT_W] <= w_data;
    if (b_we) bmem[b_filt] <= b_data;
    if (re) begin
      rfilt <= wmem[raddr];
      rbias <= bmem[raddr];
    end
  end

`ifndef SYNTHESIS
  a_wa: assert property (@(posedge clk) w_we |-> (int'(w_filt) < C_OUT && int'(w_elem) < NEL));
  a_ra: assert property (@(posedge clk) re |-> int'(raddr) < C_OUT);
`endif
endmodule
