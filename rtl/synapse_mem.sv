// synapse_mem: synaptic weight store of one core layer.
//
// Holds DEPTH signed W_BITS-bit weights, addressed as pre * N_POST + post by
// the layer that owns it. The weights of a trained network are written once
// through the write port before inference; during inference the layer reads
// one weight per cycle. The read is combinational, like the distributed
// latch/flip-flop storage next to the neurons of the original core, so a
// layer can read a weight and update a neuron in the same cycle. A write and
// a read of the same address in one cycle return the old weight.
// The array is not reset: every weight that is read must have been written.
module synapse_mem
  import mubrain_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  weight_t       wdata,
  input  logic [AW-1:0] raddr,
  output weight_t       rdata
);

  weight_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
