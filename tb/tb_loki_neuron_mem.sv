// tb_loki_neuron_mem: drives the latch memory the way the neuron pipeline does. Every cycle a
// group is read (never from the bank written in that cycle) and, most cycles, a group is
// written. A write presented in cycle R must be visible from cycle R+1 on for reads of its
// bank's words and must not change any other word. All words are written first.
module tb_loki_neuron_mem;
  import loki_pkg::*;
  logic                   clk = 1'b0, rst_n = 1'b0;
  logic                   rd_en = 1'b0, we = 1'b0;
  logic [GROUP_W-1:0]     rd_group = '0, wr_group = '0;
  logic [NMEM_WORD_W-1:0] rd_data, wr_data = '0;
  logic [NMEM_WORD_W-1:0] model [N_GROUPS];
  int checks = 0, failures = 0;
  // write presented in the previous cycle (applied to the model at this cycle's start)
  logic                   pend_we = 1'b0;
  logic [GROUP_W-1:0]     pend_g = '0;
  logic [NMEM_WORD_W-1:0] pend_d = '0;

  loki_neuron_mem dut (.clk, .rst_n, .rd_en, .rd_group, .rd_data, .we, .wr_group, .wr_data);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NMEM_WORD_W-1:0] rnd();
    logic [NMEM_WORD_W-1:0] v;
    for (int i = 0; i < NMEM_WORD_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // initial fill, one word every other cycle
    for (int g = 0; g < N_GROUPS; g++) begin
      @(negedge clk);
      we = 1'b1; wr_group = GROUP_W'(g); wr_data = rnd(); model[g] = wr_data;
      @(negedge clk);
      we = 1'b0;
    end
    @(negedge clk);
    for (int c = 0; c < 3000; c++) begin
      // this cycle's read must avoid the bank written now (the write presented last cycle)
      automatic int g;
      do g = $urandom_range(0, N_GROUPS - 1);
      while (pend_we && (g % 2) == (pend_g % 2));
      rd_en = 1'b1;
      rd_group = GROUP_W'(g);
      we = 1'($urandom_range(0, 3) != 0);
      wr_group = GROUP_W'($urandom_range(0, N_GROUPS - 1));
      wr_data = rnd();
      #1;
      checks++;
      if (rd_data !== model[g]) begin
        failures++;
        if (failures < 10) $display("cycle %0d: group %0d read %h expected %h", c, g, rd_data, model[g]);
      end
      @(negedge clk);
      // the write presented in the cycle before last has landed; the one presented in the
      // cycle just ended lands now
      if (we) model[wr_group] = wr_data;
      pend_we = we; pend_g = wr_group;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
