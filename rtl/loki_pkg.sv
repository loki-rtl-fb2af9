// loki_pkg: sizes, encodings and shared types of the LOKI spiking neural network accelerator.
//
// LOKI is a time-multiplexed 256 x 256 fully connected crossbar of leaky integrate-and-fire
// (LIF) neurons. 32 neurons are updated in parallel, so the 256 neurons form 8 groups of 32.
// Membrane potentials are INT8 and weights INT4, as in the paper. The synapse memory holds
// 256 x 256 weights as 2048 words of 128 bit (32 weights) spread over 4 SRAM banks of
// 512 words (8 KB each). The encodings of the AER input address, the SPI frame and the
// register map are this design's own choices; the paper does not give them.
package loki_pkg;

  // ---- network size (paper: 256 neurons, 256 x 256 synapses, 32 parallel neurons) ----
  localparam int unsigned N_NEURONS   = 256;
  localparam int unsigned N_INPUTS    = 256;
  localparam int unsigned LANES       = 32;
  localparam int unsigned N_GROUPS    = N_NEURONS / LANES;     // 8
  localparam int unsigned GROUP_W     = $clog2(N_GROUPS);      // 3, the block AER address
  localparam int unsigned PRE_W       = $clog2(N_INPUTS);      // 8

  // ---- number formats (paper: INT8 state, INT4 weights) ----
  localparam int unsigned V_W         = 8;
  localparam int unsigned W_W         = 4;
  localparam int unsigned K_W         = 3;                     // leak shift k, alpha = 1 - 2^-k

  // ---- synapse memory (paper: 4 MCCG banks of 8 KB, 128-bit output) ----
  localparam int unsigned SYN_BANKS   = 4;
  localparam int unsigned SYN_WORD_W  = LANES * W_W;           // 128
  localparam int unsigned SYN_WORDS   = N_INPUTS * N_GROUPS;   // 2048
  localparam int unsigned SYN_ADDR_W  = $clog2(SYN_WORDS);     // 11
  localparam int unsigned SYN_ROWS    = SYN_WORDS / SYN_BANKS; // 512 rows = 8 KB per bank
  localparam int unsigned SYN_ROW_W   = $clog2(SYN_ROWS);      // 9

  // ---- neuron memory (paper: 2 banks x 4 words x 256 bit, latches) ----
  localparam int unsigned NMEM_WORD_W = LANES * V_W;           // 256

  // ---- AER input (paper: 17-bit address) ----
  localparam int unsigned AER_ADDR_W  = 17;
  localparam int unsigned AER_TREF_BIT = 16;                   // set: time reference event

  // ---- output spike FIFO ----
  localparam int unsigned SPK_FIFO_DEPTH = 4;

  // Operation carried down the neuron update pipeline with each group of 32 neurons.
  typedef enum logic [1:0] {
    OP_NONE      = 2'd0,
    OP_INTEGRATE = 2'd1,   // V += W (spike event)
    OP_LEAKFIRE  = 2'd2,   // fire / reset / leak (time reference event)
    OP_CLEAR     = 2'd3    // V = 0
  } op_e;

  // Tag of one group in flight in the pipeline.
  typedef struct packed {
    logic               valid;
    op_e                op;
    logic [GROUP_W-1:0] group;
  } pipe_tag_t;

  // One entry of the output spike FIFO: what a block AER handshake carries.
  typedef struct packed {
    logic [GROUP_W-1:0] addr;
    logic [LANES-1:0]   spikes;
  } spike_vec_t;

  // An input event as delivered by the AER receiver.
  typedef struct packed {
    logic             tref;    // time reference event
    logic [PRE_W-1:0] pre;     // pre-synaptic input index (spike event)
  } event_t;

  // ---- SPI register map (15-bit register address) ----
  localparam logic [14:0] CSR_VTH    = 15'h0000;   // RW, INT8 firing threshold
  localparam logic [14:0] CSR_LEAK   = 15'h0001;   // RW, leak shift k
  localparam logic [14:0] CSR_CTRL   = 15'h0002;   // W: bit 0 starts a clear of all potentials
  localparam logic [14:0] CSR_STATUS = 15'h0003;   // R: {.., weight write pending, busy}
  // Weight space: address bit 14 set, bits 12:0 = {synapse word (11 bit), 32-bit chunk (2 bit)}.
  localparam int unsigned CSR_WEIGHT_BIT = 14;
  localparam int unsigned SPI_FRAME_W    = 48;     // {rw, addr[14:0], data[31:0]}

endpackage
