// loki_lif_neuron: arithmetic of one leaky integrate-and-fire neuron (one of 32 lanes).
//
// Purely combinational; the pipeline registers around it sit in the neuron memory and the
// controller. Three operations:
//   OP_INTEGRATE  v_out = sat8(v_in + w)             one synaptic operation (SOP)
//   OP_LEAKFIRE   spike = v_in > vth;                time reference event
//                 v_out = spike ? 0 : v_in - (v_in >>> k)
//   OP_CLEAR      v_out = 0
// The leak follows the paper: alpha = 1 - 2^-k, so alpha*V = V - (V >> k) with an arithmetic
// shift, which moves a signed potential towards zero; a firing neuron is reset to zero and is
// not leaked. This design's own choices: the sum saturates to the INT8 range (the paper clamps
// potentials to INT8 during training "to prevent overflow"), a neuron fires when V is strictly
// greater than the threshold ("exceeds the firing threshold"), and k = 0 (alpha = 0) is
// allowed and clears the potential.
module loki_lif_neuron
  import loki_pkg::*;
(
  input  op_e                  op,
  input  logic signed [V_W-1:0] v_in,
  input  logic signed [W_W-1:0] w,
  input  logic signed [V_W-1:0] vth,
  input  logic [K_W-1:0]        k,
  output logic signed [V_W-1:0] v_out,
  output logic                  spike,
  output logic                  sat      // the integration saturated
);
  localparam logic signed [V_W:0] VMAX = (V_W+1)'((1 << (V_W-1)) - 1);
  localparam logic signed [V_W:0] VMIN = -(V_W+1)'(1 << (V_W-1));

  logic signed [V_W:0]   sum;
  logic signed [V_W-1:0] leaked;

  assign sum    = (V_W+1)'(v_in) + (V_W+1)'(w);
  assign leaked = v_in - (v_in >>> k);

  always_comb begin
    v_out = v_in;
    spike = 1'b0;
    sat   = 1'b0;
    unique case (op)
      OP_INTEGRATE: begin
        if (sum > VMAX) begin
          v_out = VMAX[V_W-1:0];
          sat   = 1'b1;
        end else if (sum < VMIN) begin
          v_out = VMIN[V_W-1:0];
          sat   = 1'b1;
        end else begin
          v_out = sum[V_W-1:0];
        end
      end
      OP_LEAKFIRE: begin
        spike = (v_in > vth);
        v_out = spike ? '0 : leaked;
      end
      OP_CLEAR: v_out = '0;
      default:  v_out = v_in;
    endcase
  end
endmodule
