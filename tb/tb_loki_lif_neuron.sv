// tb_loki_lif_neuron: exhaustive check of the LIF arithmetic against an integer model.
// Integrate: every INT8 potential with every INT4 weight (saturating sum). Leak/fire: every
// potential with every leak shift k and a set of thresholds. Clear: every potential.
module tb_loki_lif_neuron;
  import loki_pkg::*;
  op_e                   op;
  logic signed [V_W-1:0] v_in, vth, v_out;
  logic signed [W_W-1:0] w;
  logic [K_W-1:0]        k;
  logic                  spike, sat;
  int checks = 0, failures = 0;

  loki_lif_neuron dut (.op, .v_in, .w, .vth, .k, .v_out, .spike, .sat);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(input int ev, input bit es, input bit esat);
    checks++;
    if (int'(v_out) != ev || spike !== es || sat !== esat) begin
      failures++;
      if (failures < 10)
        $display("op=%s v=%0d w=%0d vth=%0d k=%0d: got %0d/%b/%b expected %0d/%b/%b",
                 op.name(), v_in, w, vth, k, v_out, spike, sat, ev, es, esat);
    end
  endtask

  int vths [6] = '{-128, -5, 0, 1, 40, 127};
  int s, fl;
  bit fire;

  initial begin
    #1;  // let time-0 initialisation settle first
    vth = 8'sd10; k = 3'd1;
    op = OP_INTEGRATE;
    for (int v = -128; v < 128; v++) begin
      for (int ww = -8; ww < 8; ww++) begin
        s = v + ww;
        v_in = V_W'(v); w = W_W'(ww);
        #1;
        expect_out(s > 127 ? 127 : (s < -128 ? -128 : s), 1'b0, (s > 127) || (s < -128));
      end
    end
    op = OP_LEAKFIRE;
    w = '0;
    for (int t = 0; t < 6; t++) begin
      for (int kk = 0; kk < 8; kk++) begin
        for (int v = -128; v < 128; v++) begin
          fl = (v >= 0) ? (v >> kk) : -((-v + (1 << kk) - 1) >> kk); // floor(v / 2^k)
          fire = v > vths[t];
          vth = V_W'(vths[t]); k = K_W'(kk); v_in = V_W'(v);
          #1;
          expect_out(fire ? 0 : v - fl, fire, 1'b0);
        end
      end
    end
    op = OP_CLEAR;
    for (int v = -128; v < 128; v++) begin
      v_in = V_W'(v);
      #1;
      expect_out(0, 1'b0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
