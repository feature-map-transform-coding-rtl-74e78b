// ddr_word_model: behavioural stand-in for the external DRAM and its controller.
//
// Not a model of the DDR3 device itself: it is a word-addressed store of MEM_W
// bits with the layer's two channels. Read: while rd_en is high the word at
// rd_addr is offered (rd_valid) on clocks chosen at random with probability
// (100-STALL_PCT)%; the layer takes it with rd_ready. Write: wr_ready is raised
// with the same probability, or held low for a burst of BURST clocks every
// PERIOD clocks, to make the layer's pipeline stall. Testbenches preload and
// inspect `mem` directly. All words start at zero; addresses wrap at WORDS.
module ddr_word_model #(
  parameter int STALL_PCT = 20,
  parameter int PERIOD    = 5000,
  parameter int BURST     = 40,
  parameter int WORDS     = 1 << 19
) (
  input  logic        clk,
  input  logic        rd_en,
  input  logic [31:0] rd_addr,
  output logic        rd_valid,
  output logic [63:0] rd_data,
  input  logic        rd_ready,
  input  logic        wr_valid,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data,
  output logic        wr_ready
);
  longint unsigned mem [WORDS];
  initial for (int i = 0; i < WORDS; i++) mem[i] = 0;
  int cyc = 0;
  bit rd_ok = 0, wr_ok = 0;

  always @(negedge clk) begin
    cyc++;
    rd_ok <= ($urandom_range(99, 0) >= STALL_PCT);
    wr_ok <= ($urandom_range(99, 0) >= STALL_PCT) && ((cyc % PERIOD) >= BURST);
  end

  assign rd_valid = rd_en && rd_ok;
  assign rd_data  = mem[rd_addr[$clog2(WORDS)-1:0]];
  assign wr_ready = wr_ok;

  always @(posedge clk) if (wr_valid && wr_ready) mem[wr_addr[$clog2(WORDS)-1:0]] = wr_data;

  // unused by the model, kept for the channel's full set of signals
  wire unused = rd_ready;
endmodule
