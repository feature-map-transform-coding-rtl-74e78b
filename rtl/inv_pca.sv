// inv_pca: inverse 1x1xC transform of one pixel, x = T^T * y + mu.
//
// The forward PCA works on 1x1xC blocks, so its inverse is a CxC matrix applied
// to the C dequantized coefficients of each pixel. Coefficients arrive one per
// clock in channel order and are collected in a vector register; when the last
// one of a pixel arrives, the vector is handed to the output stage, which produces
// one reconstructed channel per clock: a C-wide dot product of the vector with
// row c of the matrix RAM, plus the per-channel offset mu[c]. Collecting the next
// pixel overlaps with the output of the current one, so the block keeps up with
// one coefficient per clock and needs C multipliers.
//
// Matrix and offsets are loaded through their write ports (row c = output
// channel c, column k = input coefficient k), signed TW_W-bit entries (the paper
// quantizes the PCA matrix to 8 bits). Output: x, its channel, and a pulse at the
// last channel of a pixel; the first channel of a pixel leaves two clocks after
// its last coefficient arrived. `clear` restarts the channel count.
module inv_pca #(
  parameter int unsigned C = 64,
  localparam int unsigned CH_W = (C > 1) ? $clog2(C) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clear,
  input  logic                             m_we,
  input  logic [CH_W-1:0]                  m_row,
  input  logic [CH_W-1:0]                  m_col,
  input  logic signed [fmtc_pkg::TW_W-1:0] m_data,
  input  logic                             b_we,
  input  logic [CH_W-1:0]                  b_ch,
  input  logic signed [fmtc_pkg::X_W-1:0]  b_data,
  input  logic                             in_valid,
  input  logic signed [fmtc_pkg::Y_W-1:0]  y,
  output logic                             out_valid,
  output logic [CH_W-1:0]                  out_ch,
  output logic                             out_last,
  output logic signed [fmtc_pkg::X_W-1:0]  x
);
  import fmtc_pkg::*;

  logic [C*TW_W-1:0]     mat [C];
  logic signed [X_W-1:0] mu  [C];

  logic [C*Y_W-1:0] col_q, vec_q;   // collecting / working coefficient vectors
  logic [CH_W-1:0]  in_k;
  logic             run;
  logic [CH_W-1:0]  row;
  logic             rd_v;
  logic [CH_W-1:0]  rd_ch;
  logic [C*TW_W-1:0] row_q;
  logic signed [X_W-1:0] mu_q;

  wire complete = in_valid && (int'(in_k) == C - 1);

  // matrix RAM: row of output channel `row`, registered read
  always_ff @(posedge clk) begin
    if (m_we) mat[m_row][m_col*TW_W +: TW_W] <= m_data;
    if (b_we) mu[b_ch] <= b_data;
    if (complete || run) begin
      row_q <= mat[complete ? CH_W'(0) : row];
      mu_q  <= mu[complete ? CH_W'(0) : row];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_k  <= '0;
      run   <= 1'b0;
      row   <= '0;
      rd_v  <= 1'b0;
      rd_ch <= '0;
    end else if (clear) begin
      in_k  <= '0;
      run   <= 1'b0;
      row   <= '0;
      rd_v  <= 1'b0;
      rd_ch <= '0;
    end else begin
      if (in_valid) in_k <= complete ? '0 : in_k + 1'b1;
      rd_v <= complete || run;
      if (complete) begin
        rd_ch <= '0;
        row   <= (C > 1) ? CH_W'(1) : '0;
        run   <= (C > 1);
      end else if (run) begin
        rd_ch <= row;
        row   <= row + 1'b1;
        run   <= (int'(row) != C - 1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) col_q[in_k*Y_W +: Y_W] <= y;
    if (complete) begin
      vec_q <= col_q;
      vec_q[(C-1)*Y_W +: Y_W] <= y;
    end
  end

  // output stage: one dot product per clock
  logic signed [X_W-1:0] dot;
  always_comb begin
    dot = mu_q;
    for (int k = 0; k < C; k++) begin
      dot += X_W'($signed(vec_q[k*Y_W +: Y_W])) * X_W'($signed(row_q[k*TW_W +: TW_W]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_last  <= 1'b0;
      x         <= '0;
    end else begin
      out_valid <= rd_v && !clear;
      out_ch    <= rd_ch;
      out_last  <= rd_v && (int'(rd_ch) == C - 1);
      if (rd_v) x <= dot;
    end
  end

`ifndef SYNTHESIS
  // a new pixel may only complete once the previous one has left the matrix read
  a_overlap: assert property (@(posedge clk) disable iff (!rst_n || clear) complete |-> !run);
`endif
endmodule
