// loki_block_aer_tx: block AER output transmitter.
//
// One four-phase handshake carries a whole 32-bit spike vector, one bit per neuron of a group,
// together with the 3-bit group address: up to 32 spikes per handshake instead of one. The
// spiking neuron's index is 32 * addr + bit position. The vector is taken from the spike FIFO,
// driven on spikes/addr, and req is raised; the receiver's asynchronous ack is synchronized
// with two flip-flops; req falls when ack is seen high, and the next vector is sent once ack
// is seen low again. spikes and addr are stable while req is high (asserted).
// What follows the paper: 32-bit vector, 3-bit address, request/acknowledge handshake, the
// two-stage synchronizer. This design's own choice: the FSM and the FIFO in front of it.
module loki_block_aer_tx
  import loki_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               fifo_empty,
  input  spike_vec_t         fifo_dout,
  output logic               fifo_pop,
  output logic [LANES-1:0]   aer_spikes,
  output logic [GROUP_W-1:0] aer_addr,
  output logic               aer_req,
  input  logic               aer_ack
);
  typedef enum logic [1:0] {TX_IDLE, TX_WAIT_ACK, TX_WAIT_NACK} tx_state_e;

  tx_state_e state;
  logic      ack_s;

  loki_sync2 u_sync_ack (.clk(clk), .rst_n(rst_n), .d(aer_ack), .q(ack_s));

  assign fifo_pop = (state == TX_IDLE) && !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= TX_IDLE;
      aer_req    <= 1'b0;
      aer_spikes <= '0;
      aer_addr   <= '0;
    end else begin
      unique case (state)
        TX_IDLE: if (!fifo_empty) begin
          aer_spikes <= fifo_dout.spikes;
          aer_addr   <= fifo_dout.addr;
          aer_req    <= 1'b1;
          state      <= TX_WAIT_ACK;
        end
        TX_WAIT_ACK: if (ack_s) begin
          aer_req <= 1'b0;
          state   <= TX_WAIT_NACK;
        end
        TX_WAIT_NACK: if (!ack_s) state <= TX_IDLE;
        default: state <= TX_IDLE;
      endcase
    end
  end

  a_data_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  (aer_req && $past(aer_req)) |-> ($stable(aer_spikes) && $stable(aer_addr)))
    else $error("block AER data changed during a handshake");
endmodule
