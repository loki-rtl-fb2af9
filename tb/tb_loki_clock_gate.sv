// tb_loki_clock_gate: checks the clock gate. An enable held during cycle c must give exactly
// one gclk pulse at the start of cycle c+1, and no pulse when it was low; gclk must be low
// whenever clk is low. The enable pattern is random.
module tb_loki_clock_gate;
  logic clk = 1'b0, en = 1'b0, gclk;
  int   checks = 0, failures = 0;
  logic en_prev = 1'b0;
  int   pulses = 0, expected = 0;

  loki_clock_gate dut (.clk, .en, .gclk);

  always #5 clk = ~clk;
  always @(posedge gclk) pulses++;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    for (int c = 0; c < 500; c++) begin
      @(posedge clk);
      en_prev = en;             // value held during the cycle that just ended
      #1;
      checks++;
      if (gclk !== en_prev) begin
        failures++;
        $display("cycle %0d: gclk=%b expected %b", c, gclk, en_prev);
      end
      if (en_prev) expected++;
      en <= 1'($urandom_range(0, 1));
      #5;                       // clk low now
      checks++;
      if (gclk !== 1'b0) begin
        failures++;
        $display("cycle %0d: gclk high while clk low", c);
      end
    end
    @(posedge clk);
    if (en) expected++;
    #1;
    checks++;
    if (pulses != expected) begin
      failures++;
      $display("pulses %0d expected %0d", pulses, expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
