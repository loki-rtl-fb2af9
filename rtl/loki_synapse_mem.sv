// loki_synapse_mem: multi-cycle clock-gated (MCCG) synapse memory.
//
// Four SRAM banks of 512 x 128 bit hold the 256 x 256 INT4 weights. The two least significant
// address bits select the bank (bank decoder), the upper nine bits the row. Each bank has its
// own clock gate: an access presented in cycle p (en = 1) enables only the selected bank's
// clock, which pulses once at the start of cycle p+1 and captures the row address. The bank's
// clock then stays off, so the macro has four full cycles for its read. The 128-bit output
// multiplexer selects the bank whose read completes in the current cycle; the data of an access
// presented in cycle p is therefore valid on q during cycle p+4 (q_valid = 1).
// Reading consecutive addresses touches the four banks in turn, which gives one 128-bit word
// per cycle at one quarter of the clock rate per bank (Fig. 3b of the paper).
// What follows the paper: bank count, bank size, 2-bit bank decoder, per-bank clock gate,
// 128-bit output mux that picks the most recently completed bank. This design's own choices:
// the mux select is a 4-stage shift register of the bank number (the paper leaves the mux
// control out), and writes use the same gated-clock path as reads.
// Rule (asserted): a bank may be accessed again only four cycles after its last access.
module loki_synapse_mem
  import loki_pkg::*;
#(
  parameter int unsigned BANKS = SYN_BANKS,
  parameter int unsigned ROWS  = SYN_ROWS,
  parameter int unsigned WIDTH = SYN_WORD_W,
  localparam int unsigned BW   = $clog2(BANKS),
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned AW   = BW + RW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,        // access in this cycle
  input  logic             we,        // 1: write, 0: read
  input  logic [AW-1:0]    addr,      // {row, bank}
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] q,         // read data, valid 4 cycles after the access was presented
  output logic             q_valid
);
  logic [BANKS-1:0]  bank_en;
  logic [BANKS-1:0]  gclk;
  logic [WIDTH-1:0]  bank_q [BANKS];
  logic [RW-1:0]     row;
  logic [BW-1:0]     bank;

  assign bank = addr[BW-1:0];
  assign row  = addr[AW-1:BW];

  // Bank decoder: enable only the clock of the addressed bank.
  always_comb begin
    bank_en = '0;
    if (en) bank_en[bank] = 1'b1;
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    loki_clock_gate u_cg (
      .clk  (clk),
      .en   (bank_en[b]),
      .gclk (gclk[b])
    );
    loki_sram_bank #(.ROWS(ROWS), .WIDTH(WIDTH)) u_sram (
      .clk  (gclk[b]),
      .we   (we),
      .addr (row),
      .d    (wdata),
      .q    (bank_q[b])
    );
  end

  // Output mux control: the bank number of each read travels down a 4-stage shift register
  // (one stage per cycle of the multi-cycle read); the last stage selects the bank whose read
  // completes in this cycle.
  logic [BANKS-1:0]  sel_v;
  logic [BW-1:0]     sel_b [BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_v <= '0;
      for (int i = 0; i < BANKS; i++) sel_b[i] <= '0;
    end else begin
      sel_v[0] <= en & ~we;
      sel_b[0] <= bank;
      for (int i = 1; i < BANKS; i++) begin
        sel_v[i] <= sel_v[i-1];
        sel_b[i] <= sel_b[i-1];
      end
    end
  end

  assign q       = bank_q[sel_b[BANKS-1]];
  assign q_valid = sel_v[BANKS-1];

  // Each bank gets BANKS cycles per access: track the last access of every bank.
  logic [BW:0] busy_cnt [BANKS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BANKS; i++) busy_cnt[i] <= '0;
    end else begin
      for (int i = 0; i < BANKS; i++) begin
        if (bank_en[i])           busy_cnt[i] <= (BW+1)'(BANKS - 1);
        else if (busy_cnt[i] != 0) busy_cnt[i] <= busy_cnt[i] - 1'b1;
      end
    end
  end

  a_multicycle: assert property (@(posedge clk) disable iff (!rst_n)
                                 en |-> busy_cnt[bank] == 0)
    else $error("synapse bank %0d accessed before its multi-cycle read finished", bank);
endmodule
