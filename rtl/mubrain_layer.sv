// mubrain_layer: one neuron layer of a uBrain core together with the synapses
// that feed it.
//
// A layer holds N_POST integrate-and-fire neurons and the programmable weights
// from the N_PRE neurons of the layer before it. Each event on the input is
// the index of a presynaptic neuron that fired. The layer then walks over its
// neurons, one per clock cycle: it reads the weight w[pre][post] and the
// neuron's stored state, applies the if_neuron update and writes the state
// back. Every neuron that fires is queued, by index, on the output. With
// ONE_TO_ONE set the layer is the input (l2) layer: presynaptic index i feeds
// only neuron i through its own weight, so an event costs one cycle.
//
// Timing: an event accepted in cycle t is processed in cycles t+1 .. t+N_POST
// (t+1 for ONE_TO_ONE) and the next event may be accepted in the last of these
// cycles, so a layer sustains one event per N_POST cycles. A neuron that fires
// while the output queue is full holds the walk (a stall) until the queue has
// room. After reset, and whenever clr is pulsed, the layer spends N_POST
// cycles setting every neuron to Vrest and SILENCE before it accepts events;
// clr abandons an event being processed.
//
// The layer structure, the full programmability of the weights and the neuron
// rule follow the platform description. Serialising the updates through one
// neuron unit, the output queue and the clear sweep are this design's own
// choices: the original core updates each neuron in its own clock-less
// circuit.
module mubrain_layer
  import mubrain_pkg::*;
#(
  parameter int unsigned N_PRE      = 256,
  parameter int unsigned N_POST     = 64,
  parameter bit          ONE_TO_ONE = 1'b0,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned PRE_AW    = (N_PRE  > 1) ? $clog2(N_PRE)  : 1,
  localparam int unsigned POST_AW   = (N_POST > 1) ? $clog2(N_POST) : 1,
  localparam int unsigned DEPTH     = ONE_TO_ONE ? N_PRE : N_PRE * N_POST,
  localparam int unsigned MAW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,         // restart the clear sweep
  // presynaptic events
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [PRE_AW-1:0]  in_idx,
  // spikes of this layer's neurons
  output logic               out_valid,
  input  logic               out_ready,
  output logic [POST_AW-1:0] out_idx,
  // weight programming
  input  logic               w_we,
  input  logic [PRE_AW-1:0]  w_pre,
  input  logic [POST_AW-1:0] w_post,      // ignored when ONE_TO_ONE
  input  weight_t            w_data,
  // neuron parameters
  input  vmem_t              vth,
  input  vmem_t              vrest,
  // status
  output logic               busy,        // clearing, processing or spikes queued
  output logic               fire_o,      // a neuron fired this cycle
  output logic               stall_o      // walk held by a full output queue
);

  typedef enum logic [1:0] { S_CLEAR, S_IDLE, S_SCAN } lstate_e;

  lstate_e             state_q;
  logic [PRE_AW-1:0]   pre_q;
  logic [POST_AW-1:0]  j_q;

  neuron_state_t       nstate [N_POST];

  // ---- synapse lookup and neuron update --------------------------------
  logic [POST_AW-1:0]  target;
  logic [MAW-1:0]      raddr, waddr;
  weight_t             weight;
  neuron_state_t       cur, nxt;
  neuron_phase_e       phase;
  logic                spike, last, advance;
  logic                q_ready;

  always_comb begin
    if (ONE_TO_ONE) begin
      target = POST_AW'(pre_q);
      raddr  = MAW'(pre_q);
      waddr  = MAW'(w_pre);
      last   = 1'b1;
    end else begin
      target = j_q;
      raddr  = MAW'(pre_q) * MAW'(N_POST) + MAW'(j_q);
      waddr  = MAW'(w_pre) * MAW'(N_POST) + MAW'(w_post);
      last   = (j_q == POST_AW'(N_POST - 1));
    end
  end

  synapse_mem #(.DEPTH(DEPTH)) u_syn (
    .clk   (clk),
    .we    (w_we),
    .waddr (waddr),
    .wdata (w_data),
    .raddr (raddr),
    .rdata (weight)
  );

  assign cur = nstate[target];

  if_neuron u_neuron (
    .state      (cur),
    .weight     (weight),
    .vth        (vth),
    .vrest      (vrest),
    .next_state (nxt),
    .phase      (phase),
    .spike      (spike)
  );

  // a spike can only be handed on when the output queue has room
  assign advance  = (state_q == S_SCAN) && !(spike && !q_ready);
  assign in_ready = !clr && ((state_q == S_IDLE) || (advance && last));
  assign fire_o   = (state_q == S_SCAN) && spike && q_ready;
  assign stall_o  = (state_q == S_SCAN) && spike && !q_ready;

  // ---- control ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_CLEAR;
      pre_q   <= '0;
      j_q     <= '0;
    end else if (clr) begin
      state_q <= S_CLEAR;
      j_q     <= '0;
    end else begin
      case (state_q)
        S_CLEAR: begin
          if (j_q == POST_AW'(N_POST - 1)) begin
            state_q <= S_IDLE;
            j_q     <= '0;
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        S_IDLE: begin
          if (in_valid) begin
            state_q <= S_SCAN;
            pre_q   <= in_idx;
            j_q     <= '0;
          end
        end
        default: begin  // S_SCAN
          if (advance) begin
            if (last) begin
              j_q <= '0;
              if (in_valid) pre_q   <= in_idx;
              else          state_q <= S_IDLE;
            end else begin
              j_q <= j_q + 1'b1;
            end
          end
        end
      endcase
    end
  end

  // ---- neuron state memory (one write per cycle) -----------------------
  always_ff @(posedge clk) begin
    if (state_q == S_CLEAR && !clr)
      nstate[j_q] <= '{integrating: 1'b0, vmem: vrest};
    else if (advance && !clr)
      nstate[target] <= nxt;
  end

  // ---- output queue ----------------------------------------------------
  spike_fifo #(.WIDTH(POST_AW), .DEPTH(FIFO_DEPTH)) u_q (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  ((state_q == S_SCAN) && spike && !clr),
    .in_ready  (q_ready),
    .in_data   (target),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_idx)
  );

  assign busy = (state_q != S_IDLE) || out_valid;

endmodule
