// conv_ctrl: pixel/feature sequencer of the convolution.
//
// The layer produces one pixel of one output feature per clock: for each output
// pixel (row-major) it steps through the C_OUT filters, one per clock, while the
// KxK input window of that pixel stays in a register. The filters are re-read
// from weight memory for every pixel; the input activations come from the input
// cache. The window of the next pixel is fetched during the current one: the K*K
// pixel words are read one per clock into a shadow window (zeros outside the map:
// "same" padding, stride 1), and the shadow is copied into the working window as
// the next pixel starts. A pixel therefore takes SLOT = max(C_OUT, K*K+1) clocks,
// C_OUT of them productive, plus one initial slot to fetch the first window; for
// the paper's layers (C_OUT >= 64) this is C_OUT*H*W + C_OUT clocks for a layer.
//
// Interface: `start` begins a layer, `en` is the pipeline enable (0 = stall, all
// state frozen), the cache and weight reads are synchronous (data the next enabled
// clock). mac_valid/window go to the conv engine, aligned with the filter that the
// weight memory returns; `done` rises when the last filter has been issued.
// Stride 1 with zero padding (K-1)/2 is this implementation's choice.
module conv_ctrl #(
  parameter int unsigned H     = 56,
  parameter int unsigned W     = 56,
  parameter int unsigned K     = 3,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned C_OUT = 64,
  localparam int unsigned NPIX = H * W,
  localparam int unsigned NEL  = K * K * C_IN,
  localparam int unsigned PA_W = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int unsigned F_W  = (C_OUT > 1) ? $clog2(C_OUT) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic                            en,
  // input cache read
  output logic                            cache_re,
  output logic [PA_W-1:0]                 cache_raddr,
  input  logic [C_IN*fmtc_pkg::ACT_W-1:0] cache_rdata,
  // weight read
  output logic                            w_re,
  output logic [F_W-1:0]                  w_raddr,
  // to the conv engine
  output logic                            mac_valid,
  output logic [NEL*fmtc_pkg::ACT_W-1:0]  window,
  output logic                            busy,
  output logic                            done
);
  import fmtc_pkg::*;

  localparam int unsigned KK   = K * K;
  localparam int unsigned PAD  = (K - 1) / 2;
  localparam int unsigned SLOT = (C_OUT > KK + 1) ? C_OUT : KK + 1;
  localparam int unsigned WORD = C_IN * ACT_W;

  logic        active;
  int unsigned slot;       // 0 = prologue; slot n computes pixel n-1 and fetches pixel n
  int unsigned cyc;        // clock within the slot
  int unsigned fy, fx;     // coordinates of the pixel being fetched (= slot)

  logic [WORD-1:0] shadow [KK];
  logic            cap_v, cap_zero;
  int unsigned     cap_pos;

  // fetch of window element `cyc` of pixel `slot`
  logic fetch, in_map;
  int   iy, ix;
  always_comb begin
    fetch  = active && (slot < NPIX) && (cyc < KK);
    iy     = int'(fy) + int'(cyc / K) - int'(PAD);
    ix     = int'(fx) + int'(cyc % K) - int'(PAD);
    in_map = (iy >= 0) && (iy < int'(H)) && (ix >= 0) && (ix < int'(W));
    cache_re    = en && fetch && in_map;
    cache_raddr = in_map ? PA_W'(iy * int'(W) + ix) : '0;
  end

  // filter issue: slot n >= 1, clocks 0..C_OUT-1
  wire issue = active && (slot >= 1) && (cyc < C_OUT);
  assign w_re    = en && issue;
  assign w_raddr = F_W'(cyc);
  assign busy    = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      slot      <= 0;
      cyc       <= 0;
      fy        <= 0;
      fx        <= 0;
      cap_v     <= 1'b0;
      cap_zero  <= 1'b0;
      cap_pos   <= 0;
      mac_valid <= 1'b0;
      done      <= 1'b0;
    end else if (start) begin
      active    <= 1'b1;
      slot      <= 0;
      cyc       <= 0;
      fy        <= 0;
      fx        <= 0;
      cap_v     <= 1'b0;
      mac_valid <= 1'b0;
      done      <= 1'b0;
    end else if (en) begin
      mac_valid <= issue;
      cap_v     <= fetch;
      cap_zero  <= !in_map;
      cap_pos   <= cyc;
      if (active) begin
        if (cyc == SLOT - 1) begin
          cyc <= 0;
          if (slot == NPIX) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
          slot <= slot + 1;
          if (fx == W - 1) begin
            fx <= 0;
            fy <= fy + 1;
          end else begin
            fx <= fx + 1;
          end
        end else begin
          cyc <= cyc + 1;
        end
      end
    end
  end

  // shadow capture and window hand-over
  always_ff @(posedge clk) begin
    if (en) begin
      if (cap_v) shadow[cap_pos] <= cap_zero ? '0 : cache_rdata;
      if (active && slot >= 1 && cyc == 0) begin
        for (int p = 0; p < KK; p++) window[p*WORD +: WORD] <= shadow[p];
      end
    end
  end

`ifndef SYNTHESIS
  initial assert (SLOT >= KK + 1 && SLOT >= C_OUT);
`endif
endmodule
