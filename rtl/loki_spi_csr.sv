// loki_spi_csr: SPI slave and configuration/status registers.
//
// Before inference the host writes the network parameters over SPI: the 64k INT4 weights, the
// firing threshold and the leak, both shared by all neurons (as in the paper). Everything
// else here is this design's own choice, since the paper gives only the pins SCK, MOSI, MISO:
//  * an active-low chip select spi_csn frames each transfer;
//  * SPI mode 0: MOSI is sampled on the rising SCK edge, MISO changes on the falling edge;
//  * SCK, CSN and MOSI are oversampled in the core clock domain through two-stage
//    synchronizers, so SCK must be slower than clk / 6 or so;
//  * a frame is 48 bits, MSB first: rw (1 = write), a 15-bit register address, 32-bit data.
//    On a read, MISO returns the 32-bit register during the last 32 bits of the frame.
// Register map (see loki_pkg): VTH (INT8 threshold), LEAK (shift k), CTRL (bit 0: clear all
// membrane potentials), STATUS (read only: bit 0 core busy, bit 1 weight write pending).
// Weight space: address bit 14 set, bits 12:2 the synapse word, bits 1:0 which 32-bit chunk of
// the 128-bit word. Chunk 3 written last completes the word and requests one SRAM write
// (wr_valid until the controller answers wr_ready); the other chunks are staged.
module loki_spi_csr
  import loki_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  spi_sck,
  input  logic                  spi_csn,
  input  logic                  spi_mosi,
  output logic                  spi_miso,
  output logic signed [V_W-1:0] vth,
  output logic [K_W-1:0]        leak_k,
  output logic                  clear_req,   // one-cycle pulse
  output logic                  wr_valid,
  output logic [SYN_ADDR_W-1:0] wr_addr,
  output logic [SYN_WORD_W-1:0] wr_data,
  input  logic                  wr_ready,
  input  logic                  core_busy
);
  logic sck_s, csn_s, mosi_s, sck_q;

  loki_sync2                  u_sync_sck  (.clk(clk), .rst_n(rst_n), .d(spi_sck),  .q(sck_s));
  loki_sync2 #(.RESET_VAL(1)) u_sync_csn  (.clk(clk), .rst_n(rst_n), .d(spi_csn),  .q(csn_s));
  loki_sync2                  u_sync_mosi (.clk(clk), .rst_n(rst_n), .d(spi_mosi), .q(mosi_s));

  logic sck_rise, sck_fall;
  assign sck_rise = !csn_s &&  sck_s && !sck_q;
  assign sck_fall = !csn_s && !sck_s &&  sck_q;

  logic [SPI_FRAME_W-1:0] rx_sh;
  logic [5:0]             bit_cnt;
  logic [31:0]            tx_sh;
  logic [31:0]            rdata;
  logic [14:0]            frame_addr;
  logic [SYN_WORD_W-32-1:0] stage;   // chunks 0..2 of the word being written

  // Register address as it stands after the 16th bit.
  assign frame_addr = rx_sh[14:0];

  always_comb begin
    rdata = '0;
    unique case (frame_addr)
      CSR_VTH:    rdata = 32'(unsigned'(vth));
      CSR_LEAK:   rdata = 32'(leak_k);
      CSR_STATUS: rdata = {30'b0, wr_valid, core_busy};
      default:    rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_q     <= 1'b0;
      rx_sh     <= '0;
      bit_cnt   <= '0;
      tx_sh     <= '0;
      spi_miso  <= 1'b0;
      vth       <= '0;
      leak_k    <= '0;
      clear_req <= 1'b0;
      wr_valid  <= 1'b0;
      wr_addr   <= '0;
      wr_data   <= '0;
      stage     <= '0;
    end else begin
      sck_q     <= sck_s;
      clear_req <= 1'b0;
      if (wr_valid && wr_ready) wr_valid <= 1'b0;

      if (csn_s) begin
        bit_cnt <= '0;
      end else if (sck_rise && bit_cnt < 6'(SPI_FRAME_W)) begin
        rx_sh   <= {rx_sh[SPI_FRAME_W-2:0], mosi_s};
        bit_cnt <= bit_cnt + 1'b1;
      end

      // After the 16-bit header, the first falling edge loads the read data.
      if (sck_fall && bit_cnt == 6'd16) begin
        spi_miso <= rdata[31];
        tx_sh    <= {rdata[30:0], 1'b0};
      end else if (sck_fall && bit_cnt > 6'd16) begin
        spi_miso <= tx_sh[31];
        tx_sh    <= {tx_sh[30:0], 1'b0};
      end

      // A complete write frame: the 48th bit has just been shifted in.
      if (sck_rise && bit_cnt == 6'(SPI_FRAME_W - 1) && rx_sh[SPI_FRAME_W-2]) begin
        // rx_sh is one bit short here: assemble the full frame with the incoming bit.
        automatic logic [SPI_FRAME_W-1:0] f = {rx_sh[SPI_FRAME_W-2:0], mosi_s};
        if (f[32+CSR_WEIGHT_BIT]) begin
          unique case (f[33:32])
            2'd0: stage[31:0]  <= f[31:0];
            2'd1: stage[63:32] <= f[31:0];
            2'd2: stage[95:64] <= f[31:0];
            default: begin
              wr_data  <= {f[31:0], stage};
              wr_addr  <= f[32+2 +: SYN_ADDR_W];
              wr_valid <= 1'b1;
            end
          endcase
        end else begin
          unique case (f[46:32])
            CSR_VTH:  vth       <= f[V_W-1:0];
            CSR_LEAK: leak_k    <= f[K_W-1:0];
            CSR_CTRL: clear_req <= f[0];
            default: ;
          endcase
        end
      end
    end
  end

  a_no_lost_write: assert property (@(posedge clk) disable iff (!rst_n)
                                    (wr_valid && !wr_ready) |=> wr_valid)
    else $error("weight write request dropped");
endmodule
