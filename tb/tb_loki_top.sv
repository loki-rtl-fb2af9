// tb_loki_top: end-to-end test of the LOKI top level at its full size (256 inputs, 256
// neurons), driven only through its pins.
//  1. After reset, all 2048 synapse words (the full 256 x 256 INT4 weight matrix, random) are
//     written over SPI, then the threshold and the leak shift; both are read back over MISO.
//  2. Sparse phase: 12 timesteps with random spikes from random inputs, a slow block AER
//     receiver (so the output FIFO fills and the fire step stalls).
//  3. Dense phase, the paper's peak-throughput workload: one 256-256 layer at 0 % input
//     sparsity (all 256 inputs spike every timestep) for 10 timesteps, fast receiver. The
//     events of a timestep must be accepted every 9 cycles (256 SOPs per 9 cycles).
//  4. A clear of all potentials through the SPI control register, one more timestep.
// A reference model of the LIF layer (saturating INT8 integration, fire when V > Vth with
// reset to zero, leak V -= V >>> k) predicts every output spike vector, which must arrive in
// order with its group address; at the end the 256 potentials in the neuron memory must equal
// the model's. Each mechanism (weight write, AER input stall, overlapped events, saturation,
// fire, leak, skipped empty vector, FIFO stall, clear) must have happened at least once.
module tb_loki_top;
  import loki_pkg::*;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  sck = 1'b0, csn = 1'b1, mosi = 1'b0, miso;
  logic                  in_req = 1'b0, in_ack;
  logic [AER_ADDR_W-1:0] in_addr = '0;
  logic [LANES-1:0]      out_spikes;
  logic [GROUP_W-1:0]    out_addr;
  logic                  out_req, out_ack = 1'b0;

  loki_top dut (
    .clk, .rst_n, .spi_sck(sck), .spi_csn(csn), .spi_mosi(mosi), .spi_miso(miso),
    .aer_in_req(in_req), .aer_in_addr(in_addr), .aer_in_ack(in_ack),
    .aer_out_spikes(out_spikes), .aer_out_addr(out_addr), .aer_out_req(out_req),
    .aer_out_ack(out_ack)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("cycle %0d: %s", cycle, msg);
  endtask

  // ---------------- reference model ----------------
  logic signed [3:0] W [N_INPUTS][N_NEURONS];
  int                V [N_NEURONS];
  int                vth_m = 20, k_m = 2;
  spike_vec_t        expq [$];

  function automatic void model_spike(int pre);
    for (int n = 0; n < N_NEURONS; n++) begin
      V[n] = V[n] + int'(W[pre][n]);
      if (V[n] > 127) V[n] = 127;
      if (V[n] < -128) V[n] = -128;
    end
  endfunction

  function automatic void model_tref();
    for (int g = 0; g < N_GROUPS; g++) begin
      logic [LANES-1:0] s = '0;
      for (int i = 0; i < LANES; i++) begin
        int n = g * LANES + i;
        if (V[n] > vth_m) begin
          s[i] = 1'b1;
          V[n] = 0;
        end else begin
          V[n] = V[n] - (V[n] >>> k_m);
        end
      end
      if (s != 0) expq.push_back('{addr: GROUP_W'(g), spikes: s});
    end
  endfunction

  // ---------------- mechanism counters ----------------
  int n_wr = 0, n_rx_stall = 0, n_overlap = 0, n_sat = 0, n_fire = 0, n_leak = 0;
  int n_skip = 0, n_fifo_stall = 0, n_clear = 0, n_vec = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.wr_valid && dut.wr_ready) n_wr++;
    if (dut.aer_stall) n_rx_stall++;
    if (dut.overlap) n_overlap++;
    if (dut.stall_fifo) n_fifo_stall++;
    if (dut.r_tag.valid) begin
      if (dut.r_tag.op == OP_INTEGRATE && dut.sat != 0) n_sat++;
      if (dut.r_tag.op == OP_LEAKFIRE && dut.spikes != 0) n_fire++;
      if (dut.r_tag.op == OP_LEAKFIRE && dut.spikes == 0) n_skip++;
      if (dut.r_tag.op == OP_LEAKFIRE && dut.v_wr != dut.v_rd) n_leak++;
      if (dut.r_tag.op == OP_CLEAR) n_clear++;
    end
  end

  // ---------------- SPI master (mode 0) ----------------
  task automatic spi_frame(input bit rw, input logic [14:0] addr, input logic [31:0] data,
                           input int half, output logic [31:0] rdata);
    logic [47:0] f = {rw, addr, data};
    rdata = '0;
    csn = 1'b0;
    repeat (4) @(posedge clk);
    for (int i = 47; i >= 0; i--) begin
      mosi = f[i];
      repeat (half) @(posedge clk);
      sck = 1'b1;
      if (i < 32) rdata[i] = miso;
      repeat (half) @(posedge clk);
      sck = 1'b0;
    end
    repeat (4) @(posedge clk);
    csn = 1'b1;
    repeat (4) @(posedge clk);
  endtask

  // ---------------- AER input sender ----------------
  int accept_cycle [$];
  task automatic aer_send(input bit tref, input int pre);
    @(posedge clk);
    in_addr <= {tref, 8'($urandom), PRE_W'(pre)};   // bits 15:8 are ignored by LOKI
    in_req  <= 1'b1;
    @(posedge clk);
    while (!in_ack) @(posedge clk);
    in_req <= 1'b0;
    @(posedge clk);
    while (in_ack) @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && dut.ev_valid && dut.ev_ready && !dut.ev.tref)
    accept_cycle.push_back(cycle);

  // ---------------- block AER receiver ----------------
  bit slow = 1;
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && out_req && !out_ack) begin
        repeat (slow ? $urandom_range(5, 30) : 0) @(posedge clk);
        checks++;
        if (expq.size() == 0) fail($sformatf("unexpected spike vector %h @%0d", out_spikes, out_addr));
        else begin
          if (out_spikes !== expq[0].spikes || out_addr !== expq[0].addr)
            fail($sformatf("vector %h @%0d, expected %h @%0d", out_spikes, out_addr,
                           expq[0].spikes, expq[0].addr));
          void'(expq.pop_front());
        end
        n_vec++;
        out_ack <= 1'b1;
        @(posedge clk);
        while (out_req) @(posedge clk);
        out_ack <= 1'b0;
      end
    end
  end

  task automatic drain();
    int t = 0;
    while ((expq.size() != 0 || dut.core_busy || out_req) && t < 100000) begin
      @(posedge clk);
      t++;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) fail($sformatf("%0d spike vectors never arrived", expq.size()));
  endtask

  task automatic timestep(input int pre_list [$]);
    foreach (pre_list[i]) begin
      aer_send(1'b0, pre_list[i]);
      model_spike(pre_list[i]);
    end
    aer_send(1'b1, 0);
    model_tref();
  endtask

  initial begin
    logic [31:0] rd;
    #1;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < N_NEURONS; n++) V[n] = 0;
    // 1. weights, threshold and leak over SPI
    for (int p = 0; p < N_INPUTS; p++)
      for (int n = 0; n < N_NEURONS; n++) W[p][n] = 4'($urandom);
    for (int word = 0; word < SYN_WORDS; word++) begin
      automatic int p = word / N_GROUPS;
      automatic int g = word % N_GROUPS;
      for (int c = 0; c < 4; c++) begin
        automatic logic [31:0] d;
        for (int i = 0; i < 8; i++) d[i*4 +: 4] = W[p][g*LANES + c*8 + i];
        spi_frame(1'b1, 15'((1 << CSR_WEIGHT_BIT) | (word << 2) | c), d, 2, rd);
      end
    end
    spi_frame(1'b1, CSR_VTH, 32'(vth_m), 2, rd);
    spi_frame(1'b1, CSR_LEAK, 32'(k_m), 2, rd);
    spi_frame(1'b0, CSR_VTH, 32'h0, 4, rd);
    checks++;
    if (rd != 32'(vth_m)) fail("threshold read back wrong");
    spi_frame(1'b0, CSR_LEAK, 32'h0, 4, rd);
    checks++;
    if (rd != 32'(k_m)) fail("leak read back wrong");
    spi_frame(1'b0, CSR_STATUS, 32'h0, 4, rd);
    checks++;
    if (rd[1:0] != 2'b00) fail("core busy after configuration");
    $display("configuration done at cycle %0d", cycle);

    // 2. sparse phase, slow receiver
    slow = 1;
    for (int t = 0; t < 12; t++) begin
      automatic int pres [$];
      automatic int n = $urandom_range(5, 40);
      for (int i = 0; i < n; i++) pres.push_back($urandom_range(0, N_INPUTS - 1));
      timestep(pres);
    end
    drain();
    $display("sparse phase done at cycle %0d", cycle);

    // 3. dense phase: 0 % input sparsity, 10 timesteps
    slow = 0;
    for (int t = 0; t < 10; t++) begin
      automatic int pres [$];
      for (int i = 0; i < N_INPUTS; i++) pres.push_back(i);
      accept_cycle.delete();
      timestep(pres);
      checks++;
      begin
        automatic int mn = 1 << 30;
        automatic int mx = 0;
        for (int i = 1; i < accept_cycle.size(); i++) begin
          automatic int d = accept_cycle[i] - accept_cycle[i-1];
          if (d < mn) mn = d;
          if (d > mx) mx = d;
        end
        if (mn != 9 || mx != 9)
          fail($sformatf("spike events accepted every %0d..%0d cycles, expected 9", mn, mx));
        if (t == 0)
          $display("dense timestep: %0d spike events in %0d cycles (%0d SOP per cycle x100)",
                   accept_cycle.size(), accept_cycle[$] - accept_cycle[0] + 9,
                   100 * 256 * accept_cycle.size() / (accept_cycle[$] - accept_cycle[0] + 9));
      end
    end
    drain();
    $display("dense phase done at cycle %0d", cycle);

    // 4. clear and one more timestep
    spi_frame(1'b1, CSR_CTRL, 32'h1, 2, rd);
    repeat (40) @(posedge clk);
    for (int n = 0; n < N_NEURONS; n++) V[n] = 0;
    begin
      automatic int pres [$];
      for (int i = 0; i < 30; i++) pres.push_back($urandom_range(0, N_INPUTS - 1));
      timestep(pres);
    end
    // leave potentials that are not all zero, then compare the whole neuron memory
    begin
      automatic int pres [$];
      for (int i = 0; i < 10; i++) pres.push_back($urandom_range(0, N_INPUTS - 1));
      foreach (pres[i]) begin
        aer_send(1'b0, pres[i]);
        model_spike(pres[i]);
      end
    end
    drain();
    for (int g = 0; g < N_GROUPS; g++)
      for (int i = 0; i < LANES; i++) begin
        automatic int n = g * LANES + i;
        checks++;
        if (int'($signed(dut.u_nmem.mem[g][i*V_W +: V_W])) != V[n])
          fail($sformatf("neuron %0d potential %0d, expected %0d", n,
                         $signed(dut.u_nmem.mem[g][i*V_W +: V_W]), V[n]));
      end

    $display("mechanisms: weight writes %0d, AER input stalls %0d, overlapped events %0d,",
             n_wr, n_rx_stall, n_overlap);
    $display("  saturating groups %0d, firing groups %0d, leaked groups %0d, empty vectors %0d,",
             n_sat, n_fire, n_leak, n_skip);
    $display("  FIFO stall cycles %0d, cleared groups %0d, vectors sent %0d", n_fifo_stall,
             n_clear, n_vec);
    checks++; if (n_wr != SYN_WORDS) fail("not every weight word written");
    checks++; if (n_rx_stall == 0)   fail("AER input never stalled");
    checks++; if (n_overlap == 0)    fail("no overlapped events");
    checks++; if (n_sat == 0)        fail("no saturation");
    checks++; if (n_fire == 0)       fail("no neuron fired");
    checks++; if (n_leak == 0)       fail("no leak applied");
    checks++; if (n_skip == 0)       fail("no empty vector skipped");
    checks++; if (n_fifo_stall == 0) fail("fire step never stalled on the FIFO");
    checks++; if (n_clear != 2 * N_GROUPS) fail("clear passes missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
