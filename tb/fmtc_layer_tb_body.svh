// fmtc_layer_tb_body.svh: end-to-end test of fmtc_layer, shared by the small and
// the full-size testbench. The including module defines H, W, K, CI, CO (with
// CI == CO), STALL_PCT, PERIOD, BURST, WATCHDOG and instantiates the layer as `dut`.
//
// Two layers are run back to back on the same hardware. Layer 1 reads a
// compressed input map that the testbench encodes from random quantized levels;
// layer 2 reads layer 1's compressed output straight from the memory model. For
// each layer the testbench computes, independently of the RTL, the decoded
// activations (dequantize, inverse PCA, ReLU, requantize), the convolution, the
// quantized levels and the Huffman bit stream, and compares the words in memory,
// the bit count and the clock counts. It also counts how often each mechanism
// occurred (read and write stalls, zero padding, quantizer saturation, ReLU and
// activation clipping, the zero-padded last word, the longest code word) and
// fails if one never did.

  import fmtc_pkg::*;
  import fmtc_tb_pkg::*;

  localparam int NPIX = H * W;
  localparam int NEL  = K * K * CI;
  localparam int SLOT = (CO > K * K + 1) ? CO : K * K + 1;
  localparam int unsigned BASE1 = 0, BASE2 = 1 << 17, BASE3 = 1 << 18;

  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic tab_we = 0;
  tab_e tab_sel;
  logic [31:0] tab_addr0, tab_addr1;
  logic [63:0] tab_data;
  phase_e phase;
  logic done, vld_err;
  logic [31:0] out_words, out_bits, load_cycles, compute_cycles;
  logic mem_rd_en, mem_rd_valid, mem_rd_ready, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [63:0] mem_rd_data, mem_wr_data;

  int checks = 0, failures = 0;

  ddr_word_model #(.STALL_PCT(STALL_PCT), .PERIOD(PERIOD), .BURST(BURST)) u_mem (
    .clk, .rd_en(mem_rd_en), .rd_addr(mem_rd_addr), .rd_valid(mem_rd_valid),
    .rd_data(mem_rd_data), .rd_ready(mem_rd_ready),
    .wr_valid(mem_wr_valid), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .wr_ready(mem_wr_ready)
  );

  always #5 clk = ~clk;

  // ------------------------------------------------------------ model state
  int wt   [CO][NEL];
  int bias [CO];
  int mat  [CI][CI];
  longint mu [CI];
  int lev_in [], lev_out [];
  int act [];

  // ------------------------------------------------------ mechanism counters
  int n_wr_stall, n_rd_stall, n_pad, n_qsat, n_relu0, n_actsat, n_last_word, n_long;
  always @(posedge clk) if (rst_n) begin
    if ((phase == PH_COMPUTE || phase == PH_FLUSH) && !dut.en) n_wr_stall++;
    if (mem_rd_en && !mem_rd_valid) n_rd_stall++;
    if (dut.en && dut.u_seq.cap_v && dut.u_seq.cap_zero) n_pad++;
    if (dut.en && dut.q_v && dut.q_sat) n_qsat++;
    if (dut.ld_we && dut.rr_relu0) n_relu0++;
    if (dut.ld_we && dut.rr_sat) n_actsat++;
    if (dut.enc_flush && mem_wr_valid && mem_wr_ready) n_last_word++;
    if (dut.u_vld.dec && int'(dut.u_vld.hit_len) == 15) n_long++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic twrite(tab_e sel, int unsigned a0, int unsigned a1, longint unsigned d);
    @(negedge clk);
    tab_we = 1; tab_sel = sel; tab_addr0 = a0; tab_addr1 = a1; tab_data = d;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference of one layer: lev_in -> act -> lev_out
  task automatic reference();
    act = new[NPIX * CI];
    lev_out = new[NPIX * CO];
    for (int p = 0; p < NPIX; p++) begin
      for (int c = 0; c < CI; c++) begin
        longint x;
        x = mu[c];
        for (int k = 0; k < CI; k++) x += longint'(mat[c][k]) * (longint'(lev_in[p*CI + k]) * longint'(cfg.deq));
        act[p*CI + c] = act_ref(x, cfg.omul, cfg.oshift);
      end
    end
    for (int p = 0; p < NPIX; p++) begin
      int y0, x0;
      y0 = p / W; x0 = p % W;
      for (int f = 0; f < CO; f++) begin
        longint acc;
        acc = bias[f];
        for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
          int yy, xx;
          yy = y0 + ky - (K - 1) / 2; xx = x0 + kx - (K - 1) / 2;
          if (yy >= 0 && yy < H && xx >= 0 && xx < W)
            for (int c = 0; c < CI; c++)
              acc += longint'(act[(yy*W + xx)*CI + c]) * longint'(wt[f][(ky*K + kx)*CI + c]);
        end
        lev_out[p*CO + f] = quant_ref(longint'(32'(acc)), cfg.qmul, cfg.qshift);
      end
    end
  endtask

  initial begin
    bit q[$];
    longint unsigned words[$];
    int nbits, t0, act_err;
    tab_sel = TAB_WEIGHT; tab_addr0 = 0; tab_addr1 = 0; tab_data = 0;
    cfg = '0;
    build_code(1'b1);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------------------------------------------------- tables
    for (int s = 0; s < 256; s++) twrite(TAB_VLC, s, 0, (longint'(code_len[s]) << 16) | code_word[s]);
    for (int l = 1; l <= 16; l++)
      twrite(TAB_VLD_L, l, 0, (longint'(base_c[l]) << 25) | (longint'(count_c[l]) << 16) | first_c[l]);
    for (int i = 0; i < 256; i++) twrite(TAB_VLD_S, i, 0, sym_of_idx[i]);
    for (int f = 0; f < CO; f++) begin
      for (int e = 0; e < NEL; e++) begin
        wt[f][e] = (f == 1) ? 0 : int'($urandom_range(15, 0)) - 8;
        twrite(TAB_WEIGHT, f, e, longint'(wt[f][e]) & 64'hff);
      end
      bias[f] = (f == 0) ? 1000000 : int'($urandom_range(2000, 0)) - 1000;
      twrite(TAB_BIAS, f, 0, longint'(bias[f]) & 64'hffffffff);
    end
    for (int r = 0; r < CI; r++) for (int k = 0; k < CI; k++) begin
      mat[r][k] = int'($urandom_range(255, 0)) - 128;
      twrite(TAB_IPCA_M, r, k, longint'(mat[r][k]) & 64'hff);
    end
    for (int c = 0; c < CI; c++) begin
      mu[c] = longint'($urandom_range(40000, 0));
      twrite(TAB_IPCA_B, c, 0, mu[c] & 64'hffff_ffff_ffff);
    end
    @(negedge clk); tab_we = 0;

    // ---------------------------------------------- layer 1 input stream
    lev_in = new[NPIX * CI];
    for (int i = 0; i < NPIX * CI; i++) lev_in[i] = rand_level();
    q.delete();
    foreach (lev_in[i]) push_code(q, lev_in[i] & 8'hff);
    pack_words(q, words);
    foreach (words[i]) u_mem.mem[BASE1 + i] = words[i];

    cfg.deq = 16'd64; cfg.oshift = 6'd16;
    cfg.omul = 16'(int'(300.0 * $sqrt(12.0 / real'(CI))));
    cfg.qmul = 16'(int'(100.0 * $sqrt(108.0 / real'(NEL)))); cfg.qshift = 6'd16;

    for (int layer = 0; layer < 2; layer++) begin
      cfg.in_base  = (layer == 0) ? BASE1 : BASE2;
      cfg.in_words = 32'(words.size());
      cfg.out_base = (layer == 0) ? BASE2 : BASE3;
      reference();
      n_wr_stall = 0; n_rd_stall = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t0 = 0;
      while (!done) begin @(negedge clk); t0++; end
      // decoded activations in the input cache
      act_err = 0;
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < CI; c++)
        if (int'(dut.u_cache.mem[p][c*8 +: 8]) != act[p*CI + c]) act_err++;
      check(act_err == 0, $sformatf("layer %0d: %0d decoded activations differ", layer, act_err));
      check(!vld_err, "decoder error flag");
      // coded output
      q.delete(); nbits = 0;
      foreach (lev_out[i]) begin push_code(q, lev_out[i] & 8'hff); nbits += code_len[lev_out[i] & 8'hff]; end
      pack_words(q, words);
      check(int'(out_bits) == nbits, $sformatf("layer %0d: %0d bits, expected %0d", layer, out_bits, nbits));
      check(int'(out_words) == words.size(), $sformatf("layer %0d: %0d words, expected %0d", layer, out_words, words.size()));
      begin
        automatic int werr = 0;
        foreach (words[i]) if (u_mem.mem[cfg.out_base + i] != words[i]) werr++;
        check(werr == 0, $sformatf("layer %0d: %0d output words differ", layer, werr));
      end
      // rate: one output value per clock (stall clocks excluded), one decoded value per clock
      check(int'(compute_cycles) - n_wr_stall <= (NPIX + 1) * SLOT + 12 &&
            int'(compute_cycles) >= NPIX * CO,
            $sformatf("layer %0d: compute %0d clocks (%0d stalled) for %0d values", layer,
                      compute_cycles, n_wr_stall, NPIX * CO));
      check(int'(load_cycles) >= NPIX * CI && int'(load_cycles) <= NPIX * CI + n_rd_stall + 16,
            $sformatf("layer %0d: load %0d clocks (%0d read stalls) for %0d values", layer,
                      load_cycles, n_rd_stall, NPIX * CI));
      $display("layer %0d: %0d values in %0d bits (%0.3f bits/value, 8-bit baseline %0d bits); load %0d, compute %0d clocks",
               layer, NPIX * CO, nbits, real'(nbits) / real'(NPIX * CO), NPIX * CO * 8, load_cycles, compute_cycles);
      check(n_wr_stall > 0, "write stall never happened");
      check(n_rd_stall > 0, "read stall never happened");
      lev_in = lev_out;
    end
    check(n_pad > 0, "zero padding never used");
    check(n_qsat > 0, "quantizer never saturated");
    check(n_relu0 > 0, "ReLU never clipped");
    check(n_actsat > 0, "activation never saturated");
    check(n_last_word > 0, "zero-padded last word never written");
    check(n_long > 0, "longest code word never decoded");
    $display("events: pad=%0d qsat=%0d relu0=%0d actsat=%0d lastword=%0d longcode=%0d",
             n_pad, n_qsat, n_relu0, n_actsat, n_last_word, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
