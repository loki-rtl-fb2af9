// loki_spike_fifo: small FIFO of output spike vectors between the LIF neuron logic and the
// block AER transmitter.
//
// The paper's block diagram draws a queue in this place without giving its depth; DEPTH = 4
// is this design's choice. Each entry is a spike_vec_t: a 32-bit spike vector and the 3-bit
// number of its neuron group. push and pop act on the rising clock edge; dout shows the
// oldest entry while empty = 0. count is exported so that the controller can reserve room
// before it starts a fire step (credit-based flow control, so the FIFO never overflows).
// Pushing a full FIFO or popping an empty one is a protocol error (asserted).
module loki_spike_fifo
  import loki_pkg::*;
#(
  parameter int unsigned DEPTH = SPK_FIFO_DEPTH,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push,
  input  spike_vec_t din,
  input  logic       pop,
  output spike_vec_t dout,
  output logic       empty,
  output logic       full,
  output logic [PW:0] count
);
  spike_vec_t    mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop && !empty) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("spike FIFO overflow");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("spike FIFO underflow");
endmodule
