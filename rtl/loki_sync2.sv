// loki_sync2: two-stage flip-flop synchronizer for one asynchronous input.
//
// The paper names the two-stage synchronizer as what an AER handshake needs when its request
// or acknowledge crosses into the chip's clock domain. The output follows the input two
// rising clock edges later. RESET_VAL is the value both stages take in reset.
module loki_sync2 #(
  parameter bit RESET_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= RESET_VAL;
      q    <= RESET_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
