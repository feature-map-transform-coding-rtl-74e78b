// input_cache: on-chip store of one layer's decoded input feature map.
//
// The layer reads every input activation from external memory exactly once and
// keeps it here while all output features are computed from it. The store is an
// array of H*W words, one per pixel, each holding the C_IN 8-bit activations of
// that pixel, so one read returns a whole 1x1xC_IN column of the map.
//
// Write port: one activation per clock (pixel address, channel, value), written
// into its byte lane of the pixel word; the decoder delivers values in this order.
// Read port: synchronous; the word addressed while re=1 appears on rdata the next
// clock and is held while re=0.
// Keeping the whole map, rather than a few lines, is this implementation's choice:
// the paper only says that pixels are cached and reused from internal memory.
module input_cache #(
  parameter int unsigned H    = 56,
  parameter int unsigned W    = 56,
  parameter int unsigned C_IN = 64,
  localparam int unsigned NPIX = H * W,
  localparam int unsigned PA_W = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int unsigned CH_W = (C_IN > 1) ? $clog2(C_IN) : 1
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [PA_W-1:0]           waddr,
  input  logic [CH_W-1:0]           wch,
  input  logic [fmtc_pkg::ACT_W-1:0] wdata,
  input  logic                      re,
  input  logic [PA_W-1:0]           raddr,
  output logic [C_IN*fmtc_pkg::ACT_W-1:0] rdata
);
  import fmtc_pkg::*;

  logic [C_IN*ACT_W-1:0] mem [NPIX];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wch*ACT_W +: ACT_W] <= wdata;
    if (re) rdata <= mem[raddr];
  end

`ifndef SYNTHESIS
  a_waddr: assert property (@(posedge clk) we |-> (int'(waddr) < NPIX && int'(wch) < C_IN));
  a_raddr: assert property (@(posedge clk) re |-> int'(raddr) < NPIX);
`endif
endmodule
