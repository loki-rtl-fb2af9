// tb_loki_sram_bank: writes random words to every row of the 512 x 128 bank model, reads
// them back in random order and checks that q holds the read word until the next access.
module tb_loki_sram_bank;
  localparam int ROWS = 512;
  logic           clk = 1'b0, we = 1'b0;
  logic [8:0]     addr = '0;
  logic [127:0]   d = '0, q;
  logic [127:0]   model [ROWS];
  int checks = 0, failures = 0;

  loki_sram_bank dut (.clk, .we, .addr, .d, .q);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      model[r] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      we = 1'b1; addr = 9'(r); d = model[r];
    end
    @(negedge clk);
    we = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      automatic int r = $urandom_range(0, ROWS - 1);
      addr = 9'(r);
      @(negedge clk);
      checks++;
      if (q !== model[r]) begin
        failures++;
        if (failures < 10) $display("row %0d: q=%h expected %h", r, q, model[r]);
      end
      // a write must not disturb q
      if (i % 7 == 0) begin
        automatic int r2 = $urandom_range(0, ROWS - 1);
        model[r2] = {$urandom, $urandom, $urandom, $urandom};
        we = 1'b1; addr = 9'(r2); d = model[r2];
        @(negedge clk);
        we = 1'b0;
        checks++;
        if (q !== model[r] && r != r2) begin
          failures++;
          $display("q changed by a write");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
