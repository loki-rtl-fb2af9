// loki_sram_bank: behavioural model of one low-voltage 8 KB SRAM macro (512 x 128 bit).
//
// The real part is a commercial low-voltage SRAM macro whose access time at 0.59 V is longer
// than one 1.5 ns clock period; in LOKI it is clocked by its own gated clock only once every
// four cycles, so it has four cycles to complete a read. This model captures address, write
// enable and data on the rising edge of its (gated) clock and presents the read word on q from
// that edge on; q holds until the next access. The four-cycle settling of q is a timing
// property of the macro that the model does not reproduce: the user must not sample q earlier
// than four cycles after the access, which the MCCG wrapper guarantees.
// Ports follow a generic single-port macro (clock, write enable, address, data in, data out);
// the paper does not list the macro's pins.
module loki_sram_bank #(
  parameter int unsigned ROWS  = 512,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = $clog2(ROWS)
) (
  input  logic             clk,     // gated clock GCLKn
  input  logic             we,      // 1: write d to addr, 0: read addr
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= d;
    else    q         <= mem[addr];
  end
endmodule
