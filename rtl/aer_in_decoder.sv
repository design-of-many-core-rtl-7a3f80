// aer_in_decoder: address-event input of a uBrain core.
//
// An address event names the input (l2) neuron that receives a spike. The
// decoder passes events whose address lies inside the core (address < N_L2)
// on to the l2 layer as a neuron index, with the same valid/ready handshake,
// and consumes events addressed beyond the core at once, flagging each with a
// one-cycle drop pulse, so that a mis-mapped source cannot block the bus.
// It is combinational: no cycle is added.
//
// The AER input itself is part of the original core; the bounds check and
// the drop policy are this design's choices.
module aer_in_decoder
  import mubrain_pkg::*;
#(
  parameter int unsigned N_L2 = 256,
  localparam int unsigned L2_AW = (N_L2 > 1) ? $clog2(N_L2) : 1
) (
  // from the bus
  input  logic             aer_valid,
  output logic             aer_ready,
  input  aer_addr_t        aer_addr,
  // to the l2 layer
  output logic             l2_valid,
  input  logic             l2_ready,
  output logic [L2_AW-1:0] l2_idx,
  output logic             drop      // an out-of-range event was consumed
);

  logic in_range;

  assign in_range  = (32'(aer_addr) < N_L2);
  assign l2_valid  = aer_valid && in_range;
  assign l2_idx    = L2_AW'(aer_addr);
  assign aer_ready = in_range ? l2_ready : 1'b1;
  assign drop      = aer_valid && !in_range;

endmodule
