// loki_neuron_mem: latch-based membrane potential memory.
//
// The 256 INT8 membrane potentials are stored as 8 words of 256 bit (32 neurons per word) in
// two banks of four words: group g lives in bank g[0], word g[2:1]. Because consecutive
// groups alternate between the banks, one bank can be written while the other is read, which
// the neuron update pipeline does every cycle (Fig. 4 of the paper).
// Read: combinational; rd_data shows the word of rd_group in the same cycle.
// Write: we, wr_group and wr_data are presented in cycle R. They are captured in input
// registers at the end of R; during the low phase of the next cycle (the "W" cycle) the
// addressed word's latches are transparent and take the registered data. The new value can
// be read from cycle R+2 on. Opening the latches only while clk is low keeps them closed at
// the rising edge, where the pipeline registers sample data read from the same word.
// What follows the paper: two banks of 4 x 256 bit, latch storage, simultaneous read of one
// bank and write of the other. This design's own choices: the input registers, the
// low-phase word enables (the enable comes from a register and is ANDed with the inverted
// clock, so it cannot glitch), and the rule, asserted, that a read in the W cycle must not
// address the bank being written then.
// The latches are intended: the paper implements this memory with latches.
module loki_neuron_mem
  import loki_pkg::*;
#(
  parameter int unsigned WORDS = N_GROUPS,
  parameter int unsigned WIDTH = NMEM_WORD_W,
  localparam int unsigned GW   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_en,      // only used by the bank-conflict check
  input  logic [GW-1:0]    rd_group,
  output logic [WIDTH-1:0] rd_data,
  input  logic             we,
  input  logic [GW-1:0]    wr_group,
  input  logic [WIDTH-1:0] wr_data
);
  logic [WIDTH-1:0] wdata_q;
  logic             we_q;
  logic [GW-1:0]    wr_grp_q;
  logic [WORDS-1:0] word_le;
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) wdata_q <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we_q     <= 1'b0;
      wr_grp_q <= '0;
    end else begin
      we_q     <= we;
      wr_grp_q <= wr_group;
    end
  end

  // Word latch enables: open during the low phase of the W cycle only.
  always_comb begin
    word_le = '0;
    if (we_q && !clk) word_le[wr_grp_q] = 1'b1;
  end

  // Word index w = {word in bank, bank}: bank = w[0].
  for (genvar w = 0; w < WORDS; w++) begin : g_word
    always_latch begin
      if (word_le[w]) mem[w] = wdata_q;
    end
  end

  assign rd_data = mem[rd_group];

  // The bank being written in the W cycle may not be read in that cycle.
  a_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n)
                                    (rd_en && we_q) |-> (rd_group[0] != wr_grp_q[0]))
    else $error("neuron memory bank %0d read while being written", rd_group[0]);
endmodule
