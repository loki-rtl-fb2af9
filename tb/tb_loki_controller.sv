// tb_loki_controller: checks the pipeline schedule of Fig. 4 of the paper and the flow
// control around it. A queue model of the spike FIFO counts pushes (fire groups reaching the
// read stage) and pops (random). Checks:
//  * after reset the 8 groups are cleared (OP_CLEAR in the read stage, groups 0..7);
//  * a spike event from input j accepted in cycle c reads synapse words {j, g} in cycles c+g
//    and puts group g with OP_INTEGRATE in the read stage in cycle c+4+g (g = 0..7), i.e.
//    weights captured in cycles 1..8 and neurons read in 4..11 for c = 0;
//  * back-to-back spike events are accepted exactly 9 cycles apart, with the next prefetch
//    overlapping the previous event's updates;
//  * a time reference event reads no weights, puts groups 0..7 with OP_LEAKFIRE in the read
//    stage in order, and never lets the FIFO hold more than its depth (it must stall);
//  * a weight write is granted only with the pipeline empty and is written to the given word.
module tb_loki_controller;
  import loki_pkg::*;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  ev_valid = 1'b0, ev_ready;
  event_t                ev = '0;
  logic                  clear_req = 1'b0, wr_valid = 1'b0, wr_ready;
  logic [SYN_ADDR_W-1:0] wr_addr = '0;
  logic [2:0]            fifo_count = '0;
  logic                  syn_en, syn_we;
  logic [SYN_ADDR_W-1:0] syn_addr;
  pipe_tag_t             r_tag;
  logic                  busy, stall_fifo, overlap;
  int checks = 0, failures = 0, cycle = 0;
  int stalls = 0, overlaps = 0, clears_seen = 0, lf_seen = 0, pops_allowed = 1;
  int exp_syn [int];          // cycle -> synapse word expected to be read
  int exp_r   [int];          // cycle -> {op, group} expected in the read stage
  int accept_cycles [$];
  int lf_next = 0;

  loki_controller dut (.clk, .rst_n, .ev_valid, .ev, .ev_ready, .clear_req, .wr_valid, .wr_addr,
                       .wr_ready, .fifo_count, .syn_en, .syn_we, .syn_addr, .r_tag, .busy,
                       .stall_fifo, .overlap);

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("cycle %0d: %s", cycle, msg);
  endtask

  // Monitor, late in every cycle.
  always @(negedge clk) if (rst_n) begin
    if (stall_fifo) stalls++;
    if (overlap) overlaps++;
    if (ev_valid && ev_ready) begin
      accept_cycles.push_back(cycle);
      if (!ev.tref)
        for (int g = 0; g < N_GROUPS; g++) begin
          exp_syn[cycle + g]     = int'({ev.pre, GROUP_W'(g)});
          exp_r[cycle + 4 + g]   = int'(OP_INTEGRATE) * 16 + g;
        end
    end
    // synapse reads
    if (syn_en && !syn_we) begin
      checks++;
      if (!exp_syn.exists(cycle) || exp_syn[cycle] != int'(syn_addr))
        fail($sformatf("unexpected synapse read of word %0d", syn_addr));
    end else if (exp_syn.exists(cycle)) begin
      checks++;
      fail("missing synapse read");
    end
    // read stage
    if (r_tag.valid && r_tag.op == OP_CLEAR) begin
      checks++;
      if (int'(r_tag.group) != clears_seen % N_GROUPS) fail("clear out of order");
      clears_seen++;
    end else if (r_tag.valid && r_tag.op == OP_LEAKFIRE) begin
      checks++;
      if (int'(r_tag.group) != lf_next) fail("fire group out of order");
      lf_next = (lf_next + 1) % N_GROUPS;
      lf_seen++;
    end else if (r_tag.valid) begin
      checks++;
      if (!exp_r.exists(cycle) || exp_r[cycle] != int'(r_tag.op) * 16 + int'(r_tag.group))
        fail($sformatf("unexpected read-stage group %0d op %0d", r_tag.group, r_tag.op));
    end else if (exp_r.exists(cycle)) begin
      checks++;
      fail("missing read-stage group");
    end
  end

  // FIFO model: a fire group in the read stage pushes; pops are random.
  always @(posedge clk) if (rst_n) begin
    automatic int c = int'(fifo_count);
    if (r_tag.valid && r_tag.op == OP_LEAKFIRE) c++;
    if (c > 0 && pops_allowed != 0 && $urandom_range(0, 9) == 0) c--;
    checks++;
    if (c > SPK_FIFO_DEPTH) fail("FIFO overflow");
    fifo_count <= 3'(c > SPK_FIFO_DEPTH ? SPK_FIFO_DEPTH : c);
    cycle <= cycle + 1;
  end

  task automatic send(input bit tref, input int pre);
    @(posedge clk);
    ev_valid <= 1'b1;
    ev       <= '{tref: tref, pre: PRE_W'(pre)};
    @(posedge clk);
    while (!(ev_valid && ev_ready)) @(posedge clk);
    ev_valid <= 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (20) @(posedge clk);
    checks++;
    if (clears_seen != N_GROUPS) fail("reset clear pass missing");
    // back-to-back spike events
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      ev_valid = 1'b1;
      ev = '{tref: 1'b0, pre: PRE_W'($urandom)};
      @(posedge clk);
      while (!ev_ready) begin
        @(negedge clk);
        @(posedge clk);
      end
    end
    @(negedge clk);
    ev_valid = 1'b0;
    for (int i = 1; i < accept_cycles.size(); i++) begin
      checks++;
      if (accept_cycles[i] - accept_cycles[i-1] != 9)
        fail($sformatf("events accepted %0d cycles apart", accept_cycles[i] - accept_cycles[i-1]));
    end
    // time reference events, FIFO drained slowly
    for (int t = 0; t < 4; t++) begin
      send(1'b1, 0);
      repeat ($urandom_range(0, 5)) @(posedge clk);
      send(1'b0, $urandom);
    end
    repeat (200) @(posedge clk);
    // weight writes and a clear from SPI
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      wr_valid = 1'b1;
      wr_addr  = SYN_ADDR_W'($urandom);
      @(posedge clk);
      while (!wr_ready) begin
        @(negedge clk);
        @(posedge clk);
      end
      checks++;
      if (!(syn_en && syn_we && syn_addr == wr_addr)) fail("weight write not presented");
      @(negedge clk);
      wr_valid = 1'b0;
      send(1'b0, $urandom);
    end
    @(negedge clk);
    clear_req = 1'b1;
    @(negedge clk);
    clear_req = 1'b0;
    repeat (100) @(posedge clk);
    checks++;
    if (clears_seen != 2 * N_GROUPS) fail("clear request not served");
    checks++;
    if (lf_seen != 4 * N_GROUPS) fail($sformatf("%0d fire groups seen", lf_seen));
    checks++;
    if (stalls == 0) fail("no FIFO stall happened");
    checks++;
    if (overlaps == 0) fail("no overlapped event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
