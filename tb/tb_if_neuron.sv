// tb_if_neuron: exhaustive check of the integrate-and-fire update rule.
// Every membrane voltage and every weight is tried against a set of
// thresholds and rest voltages; the expected next state is computed here with
// plain integer arithmetic.
module tb_if_neuron;
  import mubrain_pkg::*;

  neuron_state_t state, next_state;
  weight_t       weight;
  vmem_t         vth, vrest;
  neuron_phase_e phase;
  logic          spike;
  int            checks = 0, failures = 0;

  if_neuron dut (.state, .weight, .vth, .vrest, .next_state, .phase, .spike);

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int th_list [6] = '{0, 1, 5, 100, 127, -3};
    int exp_v, sum;
    bit exp_spk;
    int fires = 0, overflows = 0;
    foreach (th_list[t]) begin
      for (int v = -128; v < 128; v++) begin
        for (int w = -2; w < 2; w++) begin
          state.integrating = v[0];
          state.vmem   = vmem_t'(v);
          weight       = weight_t'(w);
          vth          = vmem_t'(th_list[t]);
          vrest        = vmem_t'(int'($urandom_range(0, 20)) - 10);
          #1;
          sum     = v + w;
          exp_spk = (sum > th_list[t]);
          exp_v   = exp_spk ? int'(vrest) : (sum < -128 ? -128 : sum);
          checks++;
          if (spike !== exp_spk || int'(next_state.vmem) != exp_v ||
              next_state.integrating !== !exp_spk ||
              phase !== (exp_spk ? ST_FIRE_LEAK : ST_INTEGRATE)) begin
            failures++;
            if (failures < 10)
              $display("FAIL v=%0d w=%0d th=%0d: spike=%0b vmem=%0d (exp %0b %0d)",
                       v, w, th_list[t], spike, next_state.vmem, exp_spk, exp_v);
          end
          if (exp_spk) fires++;
          if (exp_spk && th_list[t] == 127) overflows++;
        end
      end
    end
    // both firing and accumulator-overflow firing must have been exercised
    checks++;
    if (fires == 0 || overflows == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
