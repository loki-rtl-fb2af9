// tb_loki_aer_rx: a four-phase AER sender with random delays sends 400 random events (spike
// and time reference addresses) to the receiver, whose consumer takes them with a random
// ready. Checks: every event arrives once, in order, decoded correctly; ack only rises while
// req is high and only falls after req fell; the receiver holds ack back while its buffer is
// full (the stall output must have been seen).
module tb_loki_aer_rx;
  import loki_pkg::*;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  aer_req = 1'b0, aer_ack;
  logic [AER_ADDR_W-1:0] aer_addr = '0;
  logic                  ev_valid, ev_ready = 1'b0, stall;
  event_t                ev;
  event_t                sent [$];
  int checks = 0, failures = 0, stalls = 0, received = 0;
  localparam int N = 400;

  loki_aer_rx dut (.clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .ev_valid, .ev, .ev_ready, .stall);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // protocol check on every edge
  logic ack_q = 1'b0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (aer_ack && !ack_q && !aer_req) begin
        failures++;
        $display("ack rose without request");
      end
      if (stall) stalls++;
    end
    ack_q <= aer_ack;
  end

  // consumer
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) begin
      checks++;
      if (sent.size() == 0 || ev != sent[0]) begin
        failures++;
        $display("event %0d wrong: %p", received, ev);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      received++;
    end
    ev_ready <= ($urandom_range(0, 99) < 25);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < N; i++) begin
      logic [AER_ADDR_W-1:0] a;
      a = AER_ADDR_W'($urandom);
      a[AER_TREF_BIT] = ($urandom_range(0, 9) == 0);
      repeat ($urandom_range(0, 3)) @(posedge clk);
      aer_addr <= a;
      sent.push_back('{tref: a[AER_TREF_BIT], pre: a[PRE_W-1:0]});
      @(posedge clk);
      aer_req <= 1'b1;
      while (!aer_ack) @(posedge clk);
      repeat ($urandom_range(0, 2)) @(posedge clk);
      aer_req  <= 1'b0;
      aer_addr <= AER_ADDR_W'($urandom);      // data may change once req is low
      while (aer_ack) @(posedge clk);
      checks++;
      if (aer_req) begin
        failures++;
        $display("ack fell while req high");
      end
    end
    repeat (100) @(posedge clk);
    checks++;
    if (received != N) begin
      failures++;
      $display("received %0d of %0d", received, N);
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("receiver never stalled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
