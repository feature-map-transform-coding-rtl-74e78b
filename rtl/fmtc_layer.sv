// fmtc_layer: one CNN layer whose feature maps are stored transform-coded.
//
// The output feature map of a layer is the large, repeatedly moved data set of
// CNN inference, and it is highly correlated across channels. This layer writes
// it to external memory in compressed form: each 1x1xC column of the map is
// rotated onto its principal components (the rotation is folded into the
// convolution weights together with batch norm), quantized with one uniform step
// for all components, and Huffman coded. The next layer reverses this on the way
// in: Huffman decode, rescale, inverse PCA, then the ReLU.
//
//   LOAD:    ext. memory -> vld_decoder -> dequantizer -> inv_pca -> relu_requant
//            -> input_cache   (the previous layer's compressed output, decoded once)
//   COMPUTE: input_cache -> conv_ctrl window -> conv_engine (weights from
//            weight_mem) -> quantizer -> vlc_encoder -> ext. memory
//
// One output value (one pixel of one output feature) is produced per clock, so
// the compute phase of a layer takes about C_OUT*H*W clocks. The encoder's
// `ready` is the stall enable of the whole compute pipeline, so a slow memory
// write only stretches the layer. Host interface: `cfg` (addresses and scale
// factors, see fmtc_pkg::layer_cfg_t), a table write port for weights, biases,
// codebooks and the inverse-PCA matrix, and `start`/`done`. External memory is
// seen as MEM_W-bit words: a read channel where the memory offers the word at
// mem_rd_addr (valid/ready) and a write channel (valid/ready, with address).
// Phase split, word-level memory channels and table formats are this
// implementation's choices; the chain of blocks follows the paper.
module fmtc_layer #(
  parameter int unsigned H     = 56,
  parameter int unsigned W     = 56,
  parameter int unsigned K     = 3,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned C_OUT = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host
  input  logic                        start,
  input  fmtc_pkg::layer_cfg_t        cfg,
  input  logic                        tab_we,
  input  fmtc_pkg::tab_e              tab_sel,
  input  logic [31:0]                 tab_addr0,
  input  logic [31:0]                 tab_addr1,
  input  logic [63:0]                 tab_data,
  output fmtc_pkg::phase_e            phase,
  output logic                        done,
  output logic [31:0]                 out_words,
  output logic [31:0]                 out_bits,
  output logic [31:0]                 load_cycles,
  output logic [31:0]                 compute_cycles,
  output logic                        vld_err,
  // external memory, read channel
  output logic                        mem_rd_en,
  output logic [fmtc_pkg::ADDR_W-1:0] mem_rd_addr,
  input  logic                        mem_rd_valid,
  input  logic [fmtc_pkg::MEM_W-1:0]  mem_rd_data,
  output logic                        mem_rd_ready,
  // external memory, write channel
  output logic                        mem_wr_valid,
  output logic [fmtc_pkg::ADDR_W-1:0] mem_wr_addr,
  output logic [fmtc_pkg::MEM_W-1:0]  mem_wr_data,
  input  logic                        mem_wr_ready
);
  import fmtc_pkg::*;

  localparam int unsigned NPIX  = H * W;
  localparam int unsigned NEL   = K * K * C_IN;
  localparam int unsigned PA_W  = (NPIX > 1) ? $clog2(NPIX) : 1;
  localparam int unsigned CI_W  = (C_IN > 1) ? $clog2(C_IN) : 1;
  localparam int unsigned F_W   = (C_OUT > 1) ? $clog2(C_OUT) : 1;
  localparam int unsigned E_W   = (NEL > 1) ? $clog2(NEL) : 1;

  // ---------------------------------------------------------------- control
  logic vld_start, conv_start, enc_flush, enc_empty, pipe_empty;
  logic conv_done, conv_busy;
  logic rd_more;
  logic [PA_W-1:0] ld_pix;
  logic ld_we, ld_last;
  logic [ADDR_W-1:0] wr_addr;

  layer_ctrl #(.NPIX(NPIX), .C_IN(C_IN)) u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .ld_we, .ld_last_ch(ld_last), .ld_pix,
    .conv_done, .pipe_empty, .enc_empty,
    .rd_fire(mem_rd_valid && mem_rd_ready),
    .wr_fire(mem_wr_valid && mem_wr_ready),
    .rd_addr(mem_rd_addr), .rd_more, .wr_addr,
    .phase, .vld_start, .conv_start, .enc_flush, .done,
    .out_words, .load_cycles, .compute_cycles
  );

  // ---------------------------------------------------------- table writes
  wire we_w   = tab_we && tab_sel == TAB_WEIGHT;
  wire we_b   = tab_we && tab_sel == TAB_BIAS;
  wire we_vlc = tab_we && tab_sel == TAB_VLC;
  wire we_vl  = tab_we && tab_sel == TAB_VLD_L;
  wire we_vs  = tab_we && tab_sel == TAB_VLD_S;
  wire we_im  = tab_we && tab_sel == TAB_IPCA_M;
  wire we_ib  = tab_we && tab_sel == TAB_IPCA_B;

  // ------------------------------------------------------------- load path
  logic                     dec_v;
  logic [LVL_W-1:0]         dec_sym;
  logic                     dq_v;
  logic signed [Y_W-1:0]    dq_y;
  logic                     ip_v, ip_last;
  logic [CI_W-1:0]          ip_ch;
  logic signed [X_W-1:0]    ip_x;
  logic [CI_W:0]            rr_tag;
  logic [ACT_W-1:0]         rr_a;
  logic                     rr_relu0, rr_sat;
  logic                     vld_in_ready;

  assign mem_rd_en    = rd_more;
  assign mem_rd_ready = vld_in_ready && rd_more;

  vld_decoder u_vld (
    .clk, .rst_n,
    .lt_we(we_vl), .lt_len(tab_addr0[LEN_W-1:0]), .lt_first(tab_data[15:0]),
    .lt_count(tab_data[16 +: LVL_W+1]), .lt_base(tab_data[25 +: LVL_W]),
    .st_we(we_vs), .st_idx(tab_addr0[LVL_W-1:0]), .st_sym(tab_data[LVL_W-1:0]),
    .start(vld_start), .nsym(32'(NPIX * C_IN)),
    .in_valid(mem_rd_valid && rd_more), .in_data(mem_rd_data), .in_ready(vld_in_ready),
    .in_done(!rd_more),
    .out_valid(dec_v), .out_sym(dec_sym), .busy(), .err(vld_err)
  );

  dequantizer u_dq (
    .clk, .rst_n, .in_valid(dec_v), .level(dec_sym), .deq(cfg.deq),
    .out_valid(dq_v), .y(dq_y)
  );

  inv_pca #(.C(C_IN)) u_ipca (
    .clk, .rst_n, .clear(vld_start),
    .m_we(we_im), .m_row(tab_addr0[CI_W-1:0]), .m_col(tab_addr1[CI_W-1:0]),
    .m_data(tab_data[TW_W-1:0]),
    .b_we(we_ib), .b_ch(tab_addr0[CI_W-1:0]), .b_data(tab_data[X_W-1:0]),
    .in_valid(dq_v), .y(dq_y),
    .out_valid(ip_v), .out_ch(ip_ch), .out_last(ip_last), .x(ip_x)
  );

  relu_requant #(.TAG_W(CI_W + 1)) u_relu (
    .clk, .rst_n, .in_valid(ip_v), .in_tag({ip_last, ip_ch}), .x(ip_x),
    .omul(cfg.omul), .oshift(cfg.oshift),
    .out_valid(ld_we), .out_tag(rr_tag), .a(rr_a), .relu0(rr_relu0), .sat(rr_sat)
  );
  assign ld_last = rr_tag[CI_W];

  // ---------------------------------------------------------- compute path
  logic                   en;
  logic                   cache_re;
  logic [PA_W-1:0]        cache_raddr;
  logic [C_IN*ACT_W-1:0]  cache_rdata;
  logic                   w_re;
  logic [F_W-1:0]         w_raddr;
  logic [NEL*WGT_W-1:0]   filt;
  logic signed [ACC_W-1:0] bias;
  logic                   mac_valid;
  logic [NEL*ACT_W-1:0]   window;
  logic                   eng_v;
  logic signed [ACC_W-1:0] eng_acc;
  logic                   q_v, q_sat;
  logic signed [LVL_W-1:0] q_lvl;

  input_cache #(.H(H), .W(W), .C_IN(C_IN)) u_cache (
    .clk,
    .we(ld_we), .waddr(ld_pix), .wch(rr_tag[CI_W-1:0]), .wdata(rr_a),
    .re(cache_re), .raddr(cache_raddr), .rdata(cache_rdata)
  );

  weight_mem #(.K(K), .C_IN(C_IN), .C_OUT(C_OUT)) u_wmem (
    .clk,
    .w_we(we_w), .w_filt(tab_addr0[F_W-1:0]), .w_elem(tab_addr1[E_W-1:0]),
    .w_data(tab_data[WGT_W-1:0]),
    .b_we(we_b), .b_filt(tab_addr0[F_W-1:0]), .b_data(tab_data[ACC_W-1:0]),
    .re(w_re), .raddr(w_raddr), .rfilt(filt), .rbias(bias)
  );

  conv_ctrl #(.H(H), .W(W), .K(K), .C_IN(C_IN), .C_OUT(C_OUT)) u_seq (
    .clk, .rst_n, .start(conv_start), .en,
    .cache_re, .cache_raddr, .cache_rdata,
    .w_re, .w_raddr,
    .mac_valid, .window, .busy(conv_busy), .done(conv_done)
  );

  conv_engine #(.K(K), .C_IN(C_IN)) u_mac (
    .clk, .rst_n, .en, .in_valid(mac_valid), .window, .filt, .bias,
    .out_valid(eng_v), .acc(eng_acc)
  );

  quantizer u_q (
    .clk, .rst_n, .en, .in_valid(eng_v), .acc(eng_acc),
    .qmul(cfg.qmul), .qshift(cfg.qshift),
    .out_valid(q_v), .level(q_lvl), .sat(q_sat)
  );

  vlc_encoder u_vlc (
    .clk, .rst_n, .clear(vld_start),
    .tab_we(we_vlc), .tab_sym(tab_addr0[LVL_W-1:0]), .tab_code(tab_data[MAX_LEN-1:0]),
    .tab_len(tab_data[16 +: LEN_W]),
    .en, .in_valid(q_v), .in_sym(q_lvl), .ready(en), .flush(enc_flush),
    .out_valid(mem_wr_valid), .out_data(mem_wr_data), .out_ready(mem_wr_ready),
    .empty(enc_empty), .bits(out_bits)
  );

  assign mem_wr_addr = wr_addr;
  assign pipe_empty  = !conv_busy && !mac_valid && !eng_v && !q_v;

`ifndef SYNTHESIS
  a_ld_ch: assert property (@(posedge clk) disable iff (!rst_n) ld_we |-> phase == PH_LOAD);
  a_mac:   assert property (@(posedge clk) disable iff (!rst_n) mac_valid |-> phase inside {PH_COMPUTE, PH_FLUSH});
`endif
endmodule
