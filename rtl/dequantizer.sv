// dequantizer: inverse quantizer Q^-1, scales a level back to the PCA domain.
//
// y = level * deq, where deq is the quantization step Delta in the fixed-point
// units the inverse transform expects (one step for all channels, as in the
// quantizer). One clock of latency, no back-pressure. The fixed-point form is this
// implementation's choice.
module dequantizer (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic signed [fmtc_pkg::LVL_W-1:0] level,
  input  logic [fmtc_pkg::DEQ_W-1:0]       deq,
  output logic                             out_valid,
  output logic signed [fmtc_pkg::Y_W-1:0]  y
);
  import fmtc_pkg::*;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= Y_W'(level) * $signed({1'b0, deq});
    end
  end
endmodule
