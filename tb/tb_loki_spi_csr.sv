// tb_loki_spi_csr: an SPI mode-0 master (SCK period 8 core cycles) writes and reads the
// registers and writes weight words. Checks: VTH and LEAK take the written values and read
// back over MISO; STATUS reflects core_busy; a CTRL write gives one clear_req pulse; four
// chunk writes give one weight write request with the right 11-bit word address and the
// 128-bit word assembled from the chunks (chunk 0 = bits 31:0); the request stays up until
// wr_ready.
module tb_loki_spi_csr;
  import loki_pkg::*;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  sck = 1'b0, csn = 1'b1, mosi = 1'b0, miso;
  logic signed [V_W-1:0] vth;
  logic [K_W-1:0]        leak_k;
  logic                  clear_req, wr_valid, wr_ready = 1'b0, core_busy = 1'b0;
  logic [SYN_ADDR_W-1:0] wr_addr;
  logic [SYN_WORD_W-1:0] wr_data;
  int checks = 0, failures = 0, clears = 0;

  loki_spi_csr dut (.clk, .rst_n, .spi_sck(sck), .spi_csn(csn), .spi_mosi(mosi), .spi_miso(miso),
                    .vth, .leak_k, .clear_req, .wr_valid, .wr_addr, .wr_data, .wr_ready, .core_busy);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && clear_req) begin
    clears++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic spi_frame(input bit rw, input logic [14:0] addr, input logic [31:0] data,
                           output logic [31:0] rdata);
    logic [47:0] f;
    f = {rw, addr, data};
    rdata = '0;
    csn = 1'b0;
    repeat (8) @(posedge clk);
    for (int i = 47; i >= 0; i--) begin
      mosi = f[i];
      repeat (4) @(posedge clk);
      sck = 1'b1;                          // slave samples MOSI, master samples MISO
      if (i < 32) rdata[i] = miso;
      repeat (4) @(posedge clk);
      sck = 1'b0;
    end
    repeat (8) @(posedge clk);
    csn = 1'b1;
    repeat (8) @(posedge clk);
  endtask

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] rd;
    logic [127:0] word;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8; i++) begin
      automatic logic [7:0] t = 8'($urandom);
      automatic logic [2:0] k = 3'($urandom);
      spi_frame(1'b1, CSR_VTH, 32'(t), rd);
      check("vth", 128'(unsigned'(vth)), 128'(t));
      spi_frame(1'b1, CSR_LEAK, 32'(k), rd);
      check("leak", 128'(leak_k), 128'(k));
      spi_frame(1'b0, CSR_VTH, 32'h0, rd);
      check("vth readback", 128'(rd), 128'(t));
      spi_frame(1'b0, CSR_LEAK, 32'h0, rd);
      check("leak readback", 128'(rd), 128'(k));
    end
    core_busy = 1'b1;
    spi_frame(1'b0, CSR_STATUS, 32'h0, rd);
    check("status busy", 128'(rd[0]), 128'(1));
    core_busy = 1'b0;
    spi_frame(1'b0, CSR_STATUS, 32'h0, rd);
    check("status idle", 128'(rd[0]), 128'(0));
    spi_frame(1'b1, CSR_CTRL, 32'h1, rd);
    check("clear pulses", 128'(clears), 128'(1));
    // weight words
    for (int n = 0; n < 6; n++) begin
      automatic logic [10:0] wa = 11'($urandom);
      word = {$urandom, $urandom, $urandom, $urandom};
      for (int c = 0; c < 4; c++) begin
        spi_frame(1'b1, 15'((1 << CSR_WEIGHT_BIT) | (int'(wa) << 2) | c), word[c*32 +: 32], rd);
        check("no early request", 128'(wr_valid), 128'(c == 3));
      end
      check("weight addr", 128'(wr_addr), 128'(wa));
      check("weight data", wr_data, word);
      repeat (3) @(posedge clk);
      check("request held", 128'(wr_valid), 128'(1));
      wr_ready <= 1'b1;
      @(posedge clk);
      wr_ready <= 1'b0;
      @(posedge clk);
      check("request released", 128'(wr_valid), 128'(0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
