// loki_top: LOKI, an event-driven accelerator for one fully connected layer of 256 leaky
// integrate-and-fire neurons with 256 x 256 INT4 synapses.
//
// Data flow: spike events arrive on the AER input (17-bit address, request/acknowledge).
// For each spike from input j the controller streams the 8 synapse words {j, group} out of the
// MCCG synapse memory; each word holds the 32 weights of one group of 32 neurons. In the read
// stage the group's 32 INT8 potentials are read from the latch-based neuron memory, the 32
// LIF lanes add the weights, and the result is written back one cycle later. A time reference
// event (AER address bit 16) ends the timestep: each group is compared to the threshold,
// firing neurons are reset to zero, the others are leaked by V -= V >>> k, and every group
// with at least one spike is queued as a 32-bit vector and sent out over block AER
// (32 spike bits + 3-bit group address per handshake). Weights, threshold and leak come in
// over SPI. One event occupies the pipeline for 9 cycles in steady state: 256 synaptic
// operations per 9 cycles, 18.97 GSOP/s at 667 MHz.
// The block structure, sizes, number formats and the pipeline schedule follow the paper. The
// encodings of the AER address and SPI frame, the chip select pin, skipping of all-zero spike
// vectors, the FIFO depth and the clearing of potentials after reset are this design's choices.
// Lint notes: aer_stall, stall_fifo, overlap, sat and fifo_full are status outputs of the
// sub-blocks that drive no logic here (flow control uses the FIFO count); they stay as named
// nets so that a testbench can observe the pipeline's mechanisms, and are reported as unused.
// rst_n is also reported as used both synchronously and asynchronously: the synchronous use
// is only the disable condition of the assertions.
module loki_top
  import loki_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // SPI configuration port
  input  logic                  spi_sck,
  input  logic                  spi_csn,
  input  logic                  spi_mosi,
  output logic                  spi_miso,
  // AER input
  input  logic                  aer_in_req,
  input  logic [AER_ADDR_W-1:0] aer_in_addr,
  output logic                  aer_in_ack,
  // block AER output
  output logic [LANES-1:0]      aer_out_spikes,
  output logic [GROUP_W-1:0]    aer_out_addr,
  output logic                  aer_out_req,
  input  logic                  aer_out_ack
);
  localparam int unsigned FCW = $clog2(SPK_FIFO_DEPTH) + 1;

  // ---------------- SPI + CSR ----------------
  logic signed [V_W-1:0]  vth;
  logic [K_W-1:0]         leak_k;
  logic                   clear_req;
  logic                   wr_valid, wr_ready;
  logic [SYN_ADDR_W-1:0]  wr_addr;
  logic [SYN_WORD_W-1:0]  wr_data;
  logic                   core_busy;

  loki_spi_csr u_spi (
    .clk, .rst_n, .spi_sck, .spi_csn, .spi_mosi, .spi_miso,
    .vth, .leak_k, .clear_req, .wr_valid, .wr_addr, .wr_data, .wr_ready,
    .core_busy
  );

  // ---------------- AER input ----------------
  logic   ev_valid, ev_ready, aer_stall;
  event_t ev;

  loki_aer_rx u_aer_rx (
    .clk, .rst_n, .aer_req(aer_in_req), .aer_addr(aer_in_addr), .aer_ack(aer_in_ack),
    .ev_valid, .ev, .ev_ready, .stall(aer_stall)
  );

  // ---------------- controller ----------------
  logic                  syn_en, syn_we;
  logic [SYN_ADDR_W-1:0] syn_addr;
  pipe_tag_t             r_tag;
  logic [FCW-1:0]        fifo_count;
  logic                  stall_fifo, overlap;

  loki_controller u_ctrl (
    .clk, .rst_n, .ev_valid, .ev, .ev_ready, .clear_req, .wr_valid, .wr_addr, .wr_ready,
    .fifo_count, .syn_en, .syn_we, .syn_addr, .r_tag, .busy(core_busy), .stall_fifo, .overlap
  );

  // ---------------- synapse memory (MCCG SRAM) ----------------
  logic [SYN_WORD_W-1:0] syn_q;
  logic                  syn_q_valid;

  loki_synapse_mem u_syn (
    .clk, .rst_n, .en(syn_en), .we(syn_we), .addr(syn_addr), .wdata(wr_data),
    .q(syn_q), .q_valid(syn_q_valid)
  );

  // ---------------- neuron memory (latches) ----------------
  logic [NMEM_WORD_W-1:0] v_rd, v_wr;

  loki_neuron_mem u_nmem (
    .clk, .rst_n, .rd_en(r_tag.valid), .rd_group(r_tag.group), .rd_data(v_rd),
    .we(r_tag.valid), .wr_group(r_tag.group), .wr_data(v_wr)
  );

  // ---------------- 32 LIF lanes ----------------
  logic [LANES-1:0] spikes, sat;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    loki_lif_neuron u_lif (
      .op    (r_tag.op),
      .v_in  (v_rd[i*V_W +: V_W]),
      .w     (syn_q[i*W_W +: W_W]),
      .vth   (vth),
      .k     (leak_k),
      .v_out (v_wr[i*V_W +: V_W]),
      .spike (spikes[i]),
      .sat   (sat[i])
    );
  end

  // ---------------- output spike FIFO and block AER ----------------
  logic       fifo_push, fifo_pop, fifo_empty, fifo_full;
  spike_vec_t fifo_din, fifo_dout;

  assign fifo_push = r_tag.valid && (r_tag.op == OP_LEAKFIRE) && (|spikes);
  assign fifo_din  = '{addr: r_tag.group, spikes: spikes};

  loki_spike_fifo u_fifo (
    .clk, .rst_n, .push(fifo_push), .din(fifo_din), .pop(fifo_pop), .dout(fifo_dout),
    .empty(fifo_empty), .full(fifo_full), .count(fifo_count)
  );

  loki_block_aer_tx u_aer_tx (
    .clk, .rst_n, .fifo_empty, .fifo_dout, .fifo_pop,
    .aer_spikes(aer_out_spikes), .aer_addr(aer_out_addr), .aer_req(aer_out_req),
    .aer_ack(aer_out_ack)
  );

  a_weights_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                    (r_tag.valid && r_tag.op == OP_INTEGRATE) |-> syn_q_valid)
    else $error("weights not ready in the read stage");
endmodule
