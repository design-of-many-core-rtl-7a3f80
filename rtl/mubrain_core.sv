// mubrain_core: one uBrain neurosynaptic core of N_L2 x N_L1 x 16 neurons.
//
// The core has three fully programmable layers of integrate-and-fire neurons:
// the input layer l2 (N_L2 neurons, one per input address), the hidden layer
// l1 (N_L1 neurons, each connected to every l2 neuron) and the output layer
// l0 (16 neurons, each connected to every l1 neuron). Address events enter
// through AER in, are integrated by the addressed l2 neuron, and every neuron
// that fires passes its spike to all neurons of the next layer through its
// row of 2-bit weights. Spikes of l0 neurons leave through AER out.
//
// The four configurations of the big/little platform are parameter sets:
// little 1 = 256x64x16 (the default, the size of the original core),
// little 2 = 1024x256x16, big 1 = 4096x1024x16, big 2 = 16384x4096x16.
//
// Interface: valid/ready address events in and out. An outgoing event carries
// the address {DEV_ID, l0 neuron} (zero-extended to the bus width), so that a
// core receiving it sees a distinct l2 input for every (source core, output
// neuron) pair. Configuration writes (cfg.we with cfg.dev == DEV_ID) load
// weights, and per-layer threshold and rest voltage; they should be done
// while the core is idle. Thresholds reset to +127, so a neuron fires on
// accumulator overflow until programmed otherwise; rest voltages reset to 0.
//
// Timing: the layers form a pipeline decoupled by 4-entry spike queues. An
// input event costs 1 cycle in l2; each l2 spike costs N_L1 cycles in l1 and
// each l1 spike 16 cycles in l0 (plus stalls when a queue is full). After
// reset or clr the core needs N_L2 cycles to clear its neuron states.
//
// The layer sizes, the three-layer structure, the AER ports and the neuron
// rule follow the platform description. The clocked, time-multiplexed
// implementation (the original core is clock-less), the address tagging and
// the configuration port are this design's own choices.
module mubrain_core
  import mubrain_pkg::*;
#(
  parameter int unsigned N_L2       = 256,
  parameter int unsigned N_L1       = 64,
  parameter int unsigned DEV_ID     = 0,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned L2_AW     = (N_L2 > 1) ? $clog2(N_L2) : 1,
  localparam int unsigned L1_AW     = (N_L1 > 1) ? $clog2(N_L1) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clr,          // reset all neuron states to Vrest
  input  core_cfg_t cfg,
  // AER in
  input  logic      in_valid,
  output logic      in_ready,
  input  aer_addr_t in_addr,
  // AER out
  output logic      out_valid,
  input  logic      out_ready,
  output aer_addr_t out_addr,
  // status
  output logic       busy,
  output logic [2:0] fire,        // per layer (0: l0, 1: l1, 2: l2) a neuron fired
  output logic [2:0] stall,       // per layer a walk was held
  output logic       drop         // an input address beyond the core was dropped
);

  // ---- configuration registers ----------------------------------------
  logic  sel;
  vmem_t vth_q   [3];
  vmem_t vrest_q [3];

  assign sel = cfg.we && (cfg.dev == dev_id_t'(DEV_ID));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 3; l++) begin
        vth_q[l]   <= vmem_t'(2 ** (V_BITS - 1) - 1);
        vrest_q[l] <= '0;
      end
    end else if (sel) begin
      if (cfg.target == CFG_VTH   && cfg.post[1:0] != 2'd3) vth_q[cfg.post[1:0]]   <= cfg.data;
      if (cfg.target == CFG_VREST && cfg.post[1:0] != 2'd3) vrest_q[cfg.post[1:0]] <= cfg.data;
    end
  end

  // ---- AER in ----------------------------------------------------------
  logic             dec_valid, dec_ready;
  logic [L2_AW-1:0] dec_idx;

  aer_in_decoder #(.N_L2(N_L2)) u_dec (
    .aer_valid (in_valid),
    .aer_ready (in_ready),
    .aer_addr  (in_addr),
    .l2_valid  (dec_valid),
    .l2_ready  (dec_ready),
    .l2_idx    (dec_idx),
    .drop      (drop)
  );

  // ---- layers ----------------------------------------------------------
  logic             s2_valid, s2_ready, s1_valid, s1_ready;
  logic [L2_AW-1:0] s2_idx;
  logic [L1_AW-1:0] s1_idx;
  logic [L0_AW-1:0] s0_idx;
  logic [2:0]       lbusy;

  mubrain_layer #(
    .N_PRE(N_L2), .N_POST(N_L2), .ONE_TO_ONE(1'b1), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_l2 (
    .clk, .rst_n, .clr,
    .in_valid  (dec_valid), .in_ready (dec_ready), .in_idx (dec_idx),
    .out_valid (s2_valid),  .out_ready (s2_ready), .out_idx (s2_idx),
    .w_we      (sel && cfg.target == CFG_W_IN),
    .w_pre     (L2_AW'(cfg.pre)), .w_post (L2_AW'(cfg.pre)),
    .w_data    (weight_t'(cfg.data)),
    .vth       (vth_q[2]), .vrest (vrest_q[2]),
    .busy      (lbusy[2]), .fire_o (fire[2]), .stall_o (stall[2])
  );

  mubrain_layer #(
    .N_PRE(N_L2), .N_POST(N_L1), .ONE_TO_ONE(1'b0), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_l1 (
    .clk, .rst_n, .clr,
    .in_valid  (s2_valid), .in_ready (s2_ready), .in_idx (s2_idx),
    .out_valid (s1_valid), .out_ready (s1_ready), .out_idx (s1_idx),
    .w_we      (sel && cfg.target == CFG_W_21),
    .w_pre     (L2_AW'(cfg.pre)), .w_post (L1_AW'(cfg.post)),
    .w_data    (weight_t'(cfg.data)),
    .vth       (vth_q[1]), .vrest (vrest_q[1]),
    .busy      (lbusy[1]), .fire_o (fire[1]), .stall_o (stall[1])
  );

  mubrain_layer #(
    .N_PRE(N_L1), .N_POST(N_L0), .ONE_TO_ONE(1'b0), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_l0 (
    .clk, .rst_n, .clr,
    .in_valid  (s1_valid), .in_ready (s1_ready), .in_idx (s1_idx),
    .out_valid (out_valid), .out_ready (out_ready), .out_idx (s0_idx),
    .w_we      (sel && cfg.target == CFG_W_10),
    .w_pre     (L1_AW'(cfg.pre)), .w_post (L0_AW'(cfg.post)),
    .w_data    (weight_t'(cfg.data)),
    .vth       (vth_q[0]), .vrest (vrest_q[0]),
    .busy      (lbusy[0]), .fire_o (fire[0]), .stall_o (stall[0])
  );

  // ---- AER out: tag the l0 neuron with the source device ----------------
  assign out_addr = aer_addr_t'({dev_id_t'(DEV_ID), s0_idx});
  assign busy     = |lbusy;

endmodule
