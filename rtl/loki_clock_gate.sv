// loki_clock_gate: integrated clock gate (CG) for one MCCG SRAM bank or one latch word.
//
// The enable is sampled by a latch that is transparent while clk is low, and the gated clock
// is clk AND the latched enable. An enable presented during cycle c therefore gives one clean
// high pulse of gclk at the start of cycle c+1, without glitches. The paper shows the block
// only as "CG" with inputs CLK and EN and output GCLK; the latch-and-AND form is the usual
// standard-cell clock gate and is this design's choice.
// The latch is intentional: it is what makes the gate glitch-free.
module loki_clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_lat;

  always_latch begin
    if (!clk) en_lat = en;
  end

  assign gclk = clk & en_lat;
endmodule
