// relu_requant: the layer non-linearity and requantization to 8-bit activations.
//
// After the inverse transform the reconstructed value is passed through the ReLU
// and rescaled to the unsigned ACT_W-bit activation format of the next layer:
//   a = clamp( (x*omul + 2^(oshift-1)) >>> oshift , 0, 2^ACT_W - 1 ).
// The ReLU is the lower clamp. The paper places the non-linearity after the
// decoder; the fixed-point scale and the saturation are this implementation's
// choices. A TAG_W-bit tag (the channel) travels with the value. One clock of
// latency; `relu0` and `sat` flag values clamped at zero or at full scale.
module relu_requant #(
  parameter int unsigned TAG_W = 6
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic [TAG_W-1:0]                 in_tag,
  input  logic signed [fmtc_pkg::X_W-1:0]  x,
  input  logic [fmtc_pkg::OMUL_W-1:0]      omul,
  input  logic [fmtc_pkg::SHIFT_W-1:0]     oshift,
  output logic                             out_valid,
  output logic [TAG_W-1:0]                 out_tag,
  output logic [fmtc_pkg::ACT_W-1:0]       a,
  output logic                             relu0,
  output logic                             sat
);
  import fmtc_pkg::*;

  localparam logic signed [63:0] AMAX = (64'sd1 <<< ACT_W) - 1;

  logic signed [63:0] s;
  always_comb s = rshift_round(64'(x) * $signed({48'd0, omul}), oshift);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      a         <= '0;
      relu0     <= 1'b0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        relu0   <= (s < 0);
        sat     <= (s > AMAX);
        a       <= (s < 0) ? '0 : (s > AMAX) ? ACT_W'(AMAX) : ACT_W'(s);
      end
    end
  end
endmodule
