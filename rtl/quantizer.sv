// quantizer: uniform scalar quantizer Q_Delta of the PCA coefficients.
//
// Every PCA channel uses the same step Delta, chosen from the channel with the
// largest variance, so low-variance channels collapse onto a few levels that the
// Huffman code then makes cheap. Division by Delta is done as a multiplication by
// qmul = round(2^qshift / Delta) followed by a round-half-up arithmetic shift:
//   level = clamp( (acc*qmul + 2^(qshift-1)) >>> qshift , -2^(LVL_W-1), 2^(LVL_W-1)-1 ).
// The fixed-point form, the rounding and the saturation are this implementation's
// choices. One clock of latency; en=0 holds the stage. `sat` flags a clamped level.
module quantizer (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 en,
  input  logic                                 in_valid,
  input  logic signed [fmtc_pkg::ACC_W-1:0]    acc,
  input  logic [fmtc_pkg::QMUL_W-1:0]          qmul,
  input  logic [fmtc_pkg::SHIFT_W-1:0]         qshift,
  output logic                                 out_valid,
  output logic signed [fmtc_pkg::LVL_W-1:0]    level,
  output logic                                 sat
);
  import fmtc_pkg::*;

  localparam logic signed [63:0] LMAX = (64'sd1 <<< (LVL_W - 1)) - 1;
  localparam logic signed [63:0] LMIN = -(64'sd1 <<< (LVL_W - 1));

  logic signed [63:0] scaled;
  logic signed [LVL_W-1:0] lvl_c;
  logic sat_c;

  always_comb begin
    scaled = rshift_round(64'(acc) * $signed({48'd0, qmul}), qshift);
    sat_c  = 1'b1;
    if (scaled > LMAX)      lvl_c = LVL_W'(LMAX);
    else if (scaled < LMIN) lvl_c = LVL_W'(LMIN);
    else begin
      lvl_c = LVL_W'(scaled);
      sat_c = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      level     <= '0;
      sat       <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      if (in_valid) begin
        level <= lvl_c;
        sat   <= sat_c;
      end
    end
  end
endmodule
