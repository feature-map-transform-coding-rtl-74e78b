// layer_ctrl: phase sequencer of one layer and external-memory address generator.
//
// A layer runs in phases. LOAD streams the compressed input map (written by the
// previous layer) from external memory through the decoder into the input cache;
// the whole map is cached before any output is computed, because the output of a
// layer is only read back once all of it has been stored. COMPUTE runs the
// convolution and writes the coded output; FLUSH waits for the pipeline to drain
// and the last partial word to be written; DONE reports completion.
//
// It also counts: read and write word addresses (base + words moved), the pixel
// being loaded, and the clocks spent loading and computing, so the rate of one
// output value per clock can be observed. `start` is accepted in IDLE and DONE.
// The phase split and the counters are this implementation's choices.
module layer_ctrl #(
  parameter int unsigned NPIX = 56 * 56,
  parameter int unsigned C_IN = 64,
  localparam int unsigned PA_W = (NPIX > 1) ? $clog2(NPIX) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  fmtc_pkg::layer_cfg_t        cfg,
  // load path
  input  logic                        ld_we,       // an activation was written to the cache
  input  logic                        ld_last_ch,  // ... and it was the pixel's last channel
  output logic [PA_W-1:0]             ld_pix,
  // compute path
  input  logic                        conv_done,
  input  logic                        pipe_empty,  // nothing left in the conv/quantizer stages
  input  logic                        enc_empty,
  // memory traffic
  input  logic                        rd_fire,
  input  logic                        wr_fire,
  output logic [fmtc_pkg::ADDR_W-1:0] rd_addr,
  output logic                        rd_more,
  output logic [fmtc_pkg::ADDR_W-1:0] wr_addr,
  // control
  output fmtc_pkg::phase_e            phase,
  output logic                        vld_start,
  output logic                        conv_start,
  output logic                        enc_flush,
  output logic                        done,
  output logic [31:0]                 out_words,
  output logic [31:0]                 load_cycles,
  output logic [31:0]                 compute_cycles
);
  import fmtc_pkg::*;

  logic [ADDR_W-1:0] rd_cnt;
  logic              loaded;

  assign rd_addr   = cfg.in_base + rd_cnt;
  assign rd_more   = (phase == PH_LOAD) && (rd_cnt != cfg.in_words);
  assign wr_addr   = cfg.out_base + out_words;
  assign loaded    = ld_we && ld_last_ch && (int'(ld_pix) == NPIX - 1);
  assign enc_flush = (phase == PH_FLUSH) && pipe_empty;
  assign done      = (phase == PH_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase          <= PH_IDLE;
      vld_start      <= 1'b0;
      conv_start     <= 1'b0;
      rd_cnt         <= '0;
      ld_pix         <= '0;
      out_words      <= '0;
      load_cycles    <= '0;
      compute_cycles <= '0;
    end else begin
      vld_start  <= 1'b0;
      conv_start <= 1'b0;
      if (rd_fire) rd_cnt <= rd_cnt + 1'b1;
      if (wr_fire) out_words <= out_words + 1;
      if (ld_we && ld_last_ch) ld_pix <= (int'(ld_pix) == NPIX - 1) ? '0 : ld_pix + 1'b1;
      unique case (phase)
        PH_IDLE, PH_DONE: if (start) begin
          phase          <= PH_LOAD;
          vld_start      <= 1'b1;
          rd_cnt         <= '0;
          ld_pix         <= '0;
          out_words      <= '0;
          load_cycles    <= '0;
          compute_cycles <= '0;
        end
        PH_LOAD: begin
          load_cycles <= load_cycles + 1;
          if (loaded) begin
            phase      <= PH_COMPUTE;
            conv_start <= 1'b1;
          end
        end
        PH_COMPUTE: begin
          compute_cycles <= compute_cycles + 1;
          if (conv_done && !conv_start) phase <= PH_FLUSH;
        end
        PH_FLUSH: begin
          compute_cycles <= compute_cycles + 1;
          if (pipe_empty && enc_empty) phase <= PH_DONE;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_rd_phase: assert property (@(posedge clk) disable iff (!rst_n) rd_fire |-> phase == PH_LOAD);
  a_wr_phase: assert property (@(posedge clk) disable iff (!rst_n) wr_fire |-> (phase == PH_COMPUTE || phase == PH_FLUSH));
`endif
endmodule
