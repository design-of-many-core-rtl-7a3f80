// if_neuron: update rule of one integrate-and-fire neuron, applied once per
// incoming synaptic spike.
//
// The three states follow the neuron state diagram of the platform: a spike
// arriving at a neuron in SILENCE moves it to INTEGRATE; the weight is added to
// the membrane voltage Vmem and the threshold is evaluated at once; when
// Vmem > Vth the neuron passes through FIRE/LEAK, emits a spike and sets
// Vmem = Vrest, and returns to SILENCE. A neuron that stays below threshold
// remains in INTEGRATE. The threshold test uses the full-precision sum, so
// setting Vth to the largest accumulator value makes the neuron fire exactly
// when its accumulator overflows, which is how the original core is said to
// behave. Below the most negative value the accumulator saturates.
//
// The unit is purely combinational: the layer that owns the state memory
// reads a neuron's state, presents it here with the weight, and writes back
// next_state in the same clock cycle. The original neurons are clock-less
// circuits, one per neuron; here one unit is time-shared by a whole layer
// (this design's choice).
module if_neuron
  import mubrain_pkg::*;
(
  input  neuron_state_t state,      // stored state of the addressed neuron
  input  weight_t       weight,     // synaptic weight of the arriving spike
  input  vmem_t         vth,        // threshold
  input  vmem_t         vrest,      // rest voltage after a spike
  output neuron_state_t next_state,
  output neuron_phase_e phase,      // state the neuron passes through in this update
  output logic          spike       // the neuron fires
);

  localparam int unsigned SW = V_BITS + 1;
  localparam logic signed [SW-1:0] VMIN = -(2 ** (V_BITS - 1));

  logic signed [SW-1:0] sum;

  always_comb begin
    sum = SW'(state.vmem) + SW'(weight);
    if (sum > SW'(vth)) begin
      spike                 = 1'b1;
      phase                 = ST_FIRE_LEAK;
      next_state.integrating = 1'b0;        // back to SILENCE
      next_state.vmem        = vrest;
    end else begin
      spike                 = 1'b0;
      phase                 = ST_INTEGRATE;
      next_state.integrating = 1'b1;
      next_state.vmem        = (sum < VMIN) ? vmem_t'(VMIN) : vmem_t'(sum);
    end
  end

endmodule
