// tb_loki_block_aer_tx: a queue plays the spike FIFO; a four-phase receiver with random
// acknowledge delays takes the vectors. Checks: every vector is sent once, in order, with its
// 3-bit address; req only falls after ack rose and only rises again after ack fell; the data
// are stable while req is high. Also counts the cycles per vector at zero acknowledge delay.
module tb_loki_block_aer_tx;
  import loki_pkg::*;
  logic               clk = 1'b0, rst_n = 1'b0;
  logic               fifo_empty, fifo_pop;
  spike_vec_t         fifo_dout;
  logic [LANES-1:0]   aer_spikes;
  logic [GROUP_W-1:0] aer_addr;
  logic               aer_req, aer_ack = 1'b0;
  spike_vec_t         q [$], expq [$];
  int checks = 0, failures = 0, got = 0;
  localparam int N = 300;

  // FIFO outputs are refreshed explicitly after every change of the queue.
  task automatic refresh();
    fifo_empty = (q.size() == 0);
    fifo_dout  = fifo_empty ? '0 : q[0];
  endtask
  initial refresh();

  loki_block_aer_tx dut (.clk, .rst_n, .fifo_empty, .fifo_dout, .fifo_pop,
                         .aer_spikes, .aer_addr, .aer_req, .aer_ack);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && fifo_pop) begin
    #1 void'(q.pop_front());   // after the DUT sampled the head
    refresh();
  end

  int fast = 0;
  // receiver
  initial begin
    repeat (3) @(posedge clk);
    forever begin
      while (!aer_req) @(posedge clk);
      repeat (fast ? 0 : $urandom_range(0, 4)) @(posedge clk);
      checks++;
      if (expq.size() == 0 || aer_spikes !== expq[0].spikes || aer_addr !== expq[0].addr) begin
        failures++;
        $display("vector %0d wrong: %h/%0d expected %h/%0d", got, aer_spikes, aer_addr,
                 expq[0].spikes, expq[0].addr);
      end
      if (expq.size() != 0) void'(expq.pop_front());
      got++;
      aer_ack <= 1'b1;
      @(posedge clk);
      while (aer_req) begin
        @(posedge clk);
      end
      repeat (fast ? 0 : $urandom_range(0, 3)) @(posedge clk);
      aer_ack <= 1'b0;
      @(posedge clk);
    end
  end

  // data stable and req low while ack is high
  always @(posedge clk) if (rst_n && aer_req && aer_ack && $past(aer_req)) begin
    checks++;
    if (!$stable(aer_spikes) || !$stable(aer_addr)) begin
      failures++;
      $display("data changed during handshake");
    end
  end

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < N; i++) begin
      spike_vec_t v;
      v = '{addr: GROUP_W'($urandom), spikes: $urandom};
      q.push_back(v);
      expq.push_back(v);
      refresh();
      if (i % 50 == 0) repeat ($urandom_range(0, 40)) @(posedge clk);
    end
    while (got < N) @(posedge clk);
    // throughput with an immediate acknowledge
    fast = 1;
    repeat (20) @(posedge clk);
    t0 = $time;
    for (int i = 0; i < 20; i++) begin
      spike_vec_t v;
      v = '{addr: GROUP_W'(i), spikes: $urandom};
      q.push_back(v);
      expq.push_back(v);
      refresh();
    end
    while (got < N + 20) @(posedge clk);
    t1 = $time;
    $display("cycles per vector with immediate ack: %0d", (t1 - t0) / 10 / 20);
    repeat (20) @(posedge clk);
    checks++;
    if (got != N + 20 || q.size() != 0) begin
      failures++;
      $display("sent %0d of %0d", got, N + 20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
