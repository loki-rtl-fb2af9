// tb_loki_spike_fifo: random pushes and pops (never pushing when full or popping when empty)
// against a queue model; checks order, data, empty, full and count every cycle.
module tb_loki_spike_fifo;
  import loki_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       push = 1'b0, pop = 1'b0, empty, full;
  spike_vec_t din = '0, dout;
  logic [2:0] count;
  spike_vec_t model [$];
  int checks = 0, failures = 0, fulls = 0;

  loki_spike_fifo dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      checks++;
      if (count != 3'(model.size()) || empty != (model.size() == 0) ||
          full != (model.size() == SPK_FIFO_DEPTH) ||
          (model.size() > 0 && dout != model[0])) begin
        failures++;
        if (failures < 10) $display("cycle %0d: count=%0d model=%0d", c, count, model.size());
      end
      if (full) fulls++;
      // bias towards filling in the first half, draining in the second
      push = !full && ($urandom_range(0, 99) < (c < 2500 ? 70 : 30));
      pop  = !empty && ($urandom_range(0, 99) < 50);
      din  = '{addr: GROUP_W'($urandom), spikes: $urandom};
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
      push = 1'b0; pop = 1'b0;
    end
    checks++;
    if (fulls == 0) begin
      failures++;
      $display("FIFO never filled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
