// tb_loki_synapse_mem: fills all 2048 words of the MCCG synapse memory with random data
// (consecutive addresses, one write per cycle, the banks taking turns), then reads bursts of
// eight consecutive words, as the controller does for one spike, and random single words.
// Each read presented in cycle p must appear on q with q_valid in cycle p+4 and at no other
// time; a burst of 8 words must stream out at one word per cycle (Fig. 3b of the paper).
module tb_loki_synapse_mem;
  import loki_pkg::*;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  en = 1'b0, we = 1'b0;
  logic [SYN_ADDR_W-1:0] addr = '0;
  logic [SYN_WORD_W-1:0] wdata = '0, q;
  logic                  q_valid;
  logic [SYN_WORD_W-1:0] model [SYN_WORDS];
  int checks = 0, failures = 0;
  int cycle = 0;
  // presented reads, by cycle
  logic                  hist_v [int];
  logic [SYN_ADDR_W-1:0] hist_a [int];

  loki_synapse_mem dut (.clk, .rst_n, .en, .we, .addr, .wdata, .q, .q_valid);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check the output late in every cycle against the read presented 4 cycles earlier.
  always @(negedge clk) if (rst_n) begin
    automatic bit exp_v = hist_v.exists(cycle - 4) && hist_v[cycle - 4];
    checks++;
    if (q_valid !== exp_v) begin
      failures++;
      if (failures < 10) $display("cycle %0d: q_valid=%b expected %b", cycle, q_valid, exp_v);
    end else if (exp_v) begin
      checks++;
      if (q !== model[hist_a[cycle - 4]]) begin
        failures++;
        if (failures < 10) $display("cycle %0d: word %0d wrong", cycle, hist_a[cycle - 4]);
      end
    end
  end

  task automatic present(input bit w, input int a);
    @(posedge clk);
    en    <= 1'b1;
    we    <= w;
    addr  <= SYN_ADDR_W'(a);
    wdata <= model[a];
    hist_v[cycle + 1] = !w;   // cycle is bumped by this same edge
    hist_a[cycle + 1] = SYN_ADDR_W'(a);
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(posedge clk);
      en <= 1'b0;
      we <= 1'b0;
    end
  endtask

  int q_cnt = 0;
  always @(negedge clk) if (q_valid) q_cnt++;

  initial begin
    for (int a = 0; a < SYN_WORDS; a++) model[a] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int a = 0; a < SYN_WORDS; a++) present(1'b1, a);
    idle(4);
    // bursts of 8 words = one spike event
    for (int b = 0; b < 64; b++) begin
      automatic int pre = $urandom_range(0, N_INPUTS - 1);
      for (int g = 0; g < N_GROUPS; g++) present(1'b0, pre * N_GROUPS + g);
      idle(1);
    end
    idle(6);
    checks++;
    if (q_cnt != 64 * N_GROUPS) begin
      failures++;
      $display("read words %0d expected %0d", q_cnt, 64 * N_GROUPS);
    end
    // random single reads with enough spacing
    for (int i = 0; i < 300; i++) begin
      present(1'b0, $urandom_range(0, SYN_WORDS - 1));
      idle(3);
    end
    idle(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
