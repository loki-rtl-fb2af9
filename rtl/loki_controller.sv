// loki_controller: sequencer of the neuron update pipeline.
//
// Every event is processed as 8 groups of 32 neurons. The controller "issues" one group per
// cycle: for a spike event from input j it presents synapse word {j, group} to the MCCG
// synapse memory, whose bank (group[1:0]) returns the 32 weights four cycles later. The group
// tag (valid, operation, group) travels down a 4-stage delay line so that it reaches the
// read stage R exactly when the weights arrive. In R the group's 32 potentials are read from
// the neuron memory and updated by the 32 LIF lanes; the result is written back in the next
// cycle W. With an event accepted in cycle 0 this gives the schedule of Fig. 4 of the paper:
// synapse reads captured in cycles 1..8, neuron reads in 4..11, writes in 5..12.
// After the eighth group the controller spends one cycle before it accepts the next event, so
// back-to-back events are accepted every 9 cycles and their synapse prefetch overlaps the
// previous event's neuron updates (cycles 10-12 in Fig. 4). The 9-cycle period follows the
// paper; the single idle cycle that produces it is this design's choice.
// A time reference event runs the same 8 groups with OP_LEAKFIRE and no synapse access. Each
// such group may push a spike vector into the output FIFO, so a group is issued only when the
// FIFO has room for it and for every fire group already in flight; otherwise the controller
// stalls (stall_fifo). Weight writes from SPI are granted only while the pipeline is empty and
// are followed by 3 idle cycles so that no bank is accessed before its 4-cycle slot ends.
// After reset, and when the clear request comes from SPI, all potentials are set to zero with
// 8 OP_CLEAR groups (this design's choice; the paper does not say how potentials start).
// Timing: ev is taken in the cycle with ev_valid && ev_ready; r_tag is the group in stage R.
module loki_controller
  import loki_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = SPK_FIFO_DEPTH,
  localparam int unsigned LAT = SYN_BANKS,          // synapse read latency in cycles
  localparam int unsigned CW  = $clog2(FIFO_DEPTH) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // events from the AER receiver
  input  logic                  ev_valid,
  input  event_t                ev,
  output logic                  ev_ready,
  // configuration
  input  logic                  clear_req,
  input  logic                  wr_valid,
  input  logic [SYN_ADDR_W-1:0] wr_addr,
  output logic                  wr_ready,
  // output FIFO fill level
  input  logic [CW-1:0]         fifo_count,
  // synapse memory access
  output logic                  syn_en,
  output logic                  syn_we,
  output logic [SYN_ADDR_W-1:0] syn_addr,
  // group in the read stage R
  output pipe_tag_t             r_tag,
  output logic                  busy,
  output logic                  stall_fifo,   // a fire group waits for FIFO room
  output logic                  overlap       // an event is accepted while another is in flight
);
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_GAP, C_WHOLD} ctrl_state_e;

  ctrl_state_e        state;
  op_e                cur_op;
  logic [PRE_W-1:0]   cur_pre;
  logic [GROUP_W-1:0] grp;
  logic               clear_pend;
  logic [1:0]         whold_cnt;
  pipe_tag_t          dl [LAT];
  pipe_tag_t          issue_tag;

  // Fire groups in flight that may still push into the FIFO.
  logic [CW:0] inflight_lf;
  logic        pipe_empty;
  always_comb begin
    inflight_lf = '0;
    pipe_empty  = 1'b1;
    for (int i = 0; i < LAT; i++) begin
      if (dl[i].valid && dl[i].op == OP_LEAKFIRE) inflight_lf = inflight_lf + 1'b1;
      if (dl[i].valid) pipe_empty = 1'b0;
    end
  end

  logic credit_ok;
  assign credit_ok = ((CW+1)'(fifo_count) + inflight_lf) < (CW+1)'(FIFO_DEPTH);

  op_e ev_op;
  assign ev_op = ev.tref ? OP_LEAKFIRE : OP_INTEGRATE;

  always_comb begin
    issue_tag  = '0;
    syn_en     = 1'b0;
    syn_we     = 1'b0;
    syn_addr   = '0;
    ev_ready   = 1'b0;
    wr_ready   = 1'b0;
    stall_fifo = 1'b0;
    unique case (state)
      C_IDLE: begin
        if (clear_pend) begin
          issue_tag = '{valid: 1'b1, op: OP_CLEAR, group: '0};
        end else if (wr_valid && pipe_empty) begin
          syn_en   = 1'b1;
          syn_we   = 1'b1;
          syn_addr = wr_addr;
          wr_ready = 1'b1;
        end else if (ev_valid) begin
          if (ev_op == OP_LEAKFIRE && !credit_ok) begin
            stall_fifo = 1'b1;
          end else begin
            ev_ready  = 1'b1;
            issue_tag = '{valid: 1'b1, op: ev_op, group: '0};
            syn_en    = (ev_op == OP_INTEGRATE);
            syn_addr  = {ev.pre, GROUP_W'(0)};
          end
        end
      end
      C_ISSUE: begin
        if (cur_op == OP_LEAKFIRE && !credit_ok) begin
          stall_fifo = 1'b1;
        end else begin
          issue_tag = '{valid: 1'b1, op: cur_op, group: grp};
          syn_en    = (cur_op == OP_INTEGRATE);
          syn_addr  = {cur_pre, grp};
        end
      end
      default: ;
    endcase
  end

  assign overlap = ev_valid && ev_ready && !pipe_empty;
  assign busy    = (state != C_IDLE) || !pipe_empty || clear_pend;
  assign r_tag   = dl[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      cur_op     <= OP_NONE;
      cur_pre    <= '0;
      grp        <= '0;
      clear_pend <= 1'b1;
      whold_cnt  <= '0;
      for (int i = 0; i < LAT; i++) dl[i] <= '0;
    end else begin
      dl[0] <= issue_tag;
      for (int i = 1; i < LAT; i++) dl[i] <= dl[i-1];
      if (clear_req) clear_pend <= 1'b1;

      unique case (state)
        C_IDLE: begin
          if (clear_pend) begin
            clear_pend <= clear_req;
            cur_op     <= OP_CLEAR;
            grp        <= GROUP_W'(1);
            state      <= C_ISSUE;
          end else if (wr_ready) begin
            whold_cnt <= 2'd2;
            state     <= C_WHOLD;
          end else if (ev_ready) begin
            cur_op  <= ev_op;
            cur_pre <= ev.pre;
            grp     <= GROUP_W'(1);
            state   <= C_ISSUE;
          end
        end
        C_ISSUE: begin
          if (issue_tag.valid) begin
            grp <= grp + 1'b1;
            if (grp == GROUP_W'(N_GROUPS - 1)) state <= C_GAP;
          end
        end
        C_GAP:   state <= C_IDLE;
        C_WHOLD: begin
          if (whold_cnt == 0) state <= C_IDLE;
          else                whold_cnt <= whold_cnt - 1'b1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  a_write_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 (syn_en && syn_we) |-> pipe_empty)
    else $error("weight write while reads are in flight");
endmodule
