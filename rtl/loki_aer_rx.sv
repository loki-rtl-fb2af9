// loki_aer_rx: AER input receiver (four-phase request/acknowledge handshake).
//
// The sender puts a 17-bit address on aer_addr and raises aer_req; the address must stay
// stable while aer_req is high (bundled data). aer_req is asynchronous and passes a two-stage
// synchronizer, as the paper describes for AER. Once the synchronized request is high and the
// one-entry event buffer is free, the address is captured and aer_ack is raised; when the
// request falls, aer_ack falls and the next event may come. If the buffer still holds an event
// the controller has not taken, the acknowledge is held back: this is how the core stalls the
// sender. The event is offered to the controller with a valid/ready handshake.
// Address encoding (this design's choice; the paper gives only the 17-bit width): bit 16 set
// marks the time reference event that ends a timestep; otherwise bits 7:0 are the index of the
// pre-synaptic input that spiked and bits 15:8 are ignored.
module loki_aer_rx
  import loki_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  aer_req,
  input  logic [AER_ADDR_W-1:0] aer_addr,
  output logic                  aer_ack,
  output logic                  ev_valid,
  output event_t                ev,
  input  logic                  ev_ready,
  output logic                  stall       // a request waits because the buffer is full
);
  logic req_s;

  loki_sync2 u_sync_req (.clk(clk), .rst_n(rst_n), .d(aer_req), .q(req_s));

  assign stall = req_s && !aer_ack && ev_valid && !ev_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aer_ack  <= 1'b0;
      ev_valid <= 1'b0;
      ev       <= '0;
    end else begin
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (!aer_ack) begin
        if (req_s && (!ev_valid || ev_ready)) begin
          ev.tref  <= aer_addr[AER_TREF_BIT];
          ev.pre   <= aer_addr[PRE_W-1:0];
          ev_valid <= 1'b1;
          aer_ack  <= 1'b1;
        end
      end else if (!req_s) begin
        aer_ack <= 1'b0;
      end
    end
  end

  a_ev_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                (ev_valid && !ev_ready) |=> (ev_valid && $stable(ev)))
    else $error("AER event changed while waiting");
endmodule
