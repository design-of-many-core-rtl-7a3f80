// many_core_mubrain: many-core big/little uBrain platform on a parallel
// segmented bus.
//
// Eight uBrain cores of different capacity, a sensor input and an actuator
// output are attached to LANES (two) parallel segmented bus lanes. A large
// spiking network is compiled offline into sub-networks that each fit the
// three layers of one core; little cores take the small sub-networks and big
// cores the large ones, so that few synapses sit unused. Spikes that leave
// one core's output layer travel as address events over the bus to the input
// layer of the next core. The bus controller sets the segmentation switches
// once, from a route table written before the application starts, so no
// routing decision is made while spikes flow; paths that use different
// segments, or different lanes, carry spikes at the same time, and segments
// no route uses stay unpowered.
//
// Device map (d = 2*column + side, side 0 above the lanes, 1 below):
//   d0 big-1  d1 big-2  d2 big-1  d3 little-1  d4 little-1
//   d5 little-2  d6 sensor  d7 little-2  d8 big-2  d9 actuator
// The mix of four big and four little cores and their places follow the
// platform drawing; which configuration each core has is this design's
// choice. The core sizes are parameters; their defaults are the four
// configurations (little-1 256x64x16, little-2 1024x256x16, big-1
// 4096x1024x16, big-2 16384x4096x16).
//
// Interface: a configuration port for the cores' weights and thresholds
// (core_cfg), a route-table write port for the bus controller, the sensor's
// address events in and the actuator's address events out (valid/ready),
// and status: routing conflict, segment power and activity, and per-device
// busy, fire, stall, drop and lane-contention indications.
// An event from core d leaves with address {d, l0 neuron}; the receiving
// core integrates it in the l2 neuron of that address.
//
// The Verilator lint reports UNOPTFLAT on g_dev[*].rx_ready (and the bus arrays it
// feeds): a device's ready goes into the bus, whose per-lane readies come
// back to the bus_port that chose the lane from the requests. There is no
// real loop: the choice depends on requests only, a core's in_ready does not
// depend on its in_valid, and commits, which do depend on readies, feed no
// ready.
module many_core_mubrain
  import mubrain_pkg::*;
#(
  parameter int unsigned LANES      = 2,
  parameter int unsigned N_ROUTES   = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned LIT1_L2    = 256,
  parameter int unsigned LIT1_L1    = 64,
  parameter int unsigned LIT2_L2    = 1024,
  parameter int unsigned LIT2_L1    = 256,
  parameter int unsigned BIG1_L2    = 4096,
  parameter int unsigned BIG1_L1    = 1024,
  parameter int unsigned BIG2_L2    = 16384,
  parameter int unsigned BIG2_L1    = 4096,
  localparam int unsigned RW        = (N_ROUTES > 1) ? $clog2(N_ROUTES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,            // reset all neuron states
  input  core_cfg_t        core_cfg,
  input  logic             route_we,
  input  logic [RW-1:0]    route_idx,
  input  route_t           route_wdata,
  // sensor (address events into the platform)
  input  logic             sensor_valid,
  output logic             sensor_ready,
  input  aer_addr_t        sensor_addr,
  // actuator (address events out of the platform)
  output logic             act_valid,
  input  logic             act_ready,
  output aer_addr_t        act_addr,
  // status
  output logic             conflict,
  output logic [N_COL-2:0] seg_power [LANES],
  output logic [N_COL-2:0] seg_busy  [LANES],
  output logic [N_DEV-1:0] dev_busy,
  output logic [2:0]       dev_fire  [N_DEV],
  output logic [2:0]       dev_stall [N_DEV],
  output logic [N_DEV-1:0] dev_drop,
  output logic [N_DEV-1:0] dev_contend
);

  // ---- bus controller ------------------------------------------------------
  sw_cfg_t          sw_cfg [LANES][N_COL];
  logic [LANES-1:0] lane_en [N_DEV];

  bus_controller #(.LANES(LANES), .N_ROUTES(N_ROUTES)) u_ctrl (
    .clk, .rst_n,
    .route_we, .route_idx, .route_wdata,
    .sw_cfg, .seg_power, .tx_lane_en (lane_en), .conflict
  );

  // ---- segmented bus -------------------------------------------------------
  logic      bus_tx_valid [LANES][N_DEV];
  logic      bus_tx_ready [LANES][N_DEV];
  logic      bus_rx_valid [LANES][N_DEV];
  logic      bus_rx_commit [LANES][N_DEV];
  logic      bus_rx_ready [LANES][N_DEV];
  aer_addr_t bus_rx_addr  [LANES][N_DEV];
  aer_addr_t dev_tx_addr  [N_DEV];

  segmented_bus #(.LANES(LANES)) u_bus (
    .sw_cfg   (sw_cfg),
    .tx_valid (bus_tx_valid),
    .tx_addr  (dev_tx_addr),
    .tx_ready (bus_tx_ready),
    .rx_valid (bus_rx_valid),
    .rx_commit (bus_rx_commit),
    .rx_addr  (bus_rx_addr),
    .rx_ready (bus_rx_ready),
    .seg_busy (seg_busy)
  );

  // ---- devices ---------------------------------------------------------------
  for (genvar d = 0; d < N_DEV; d++) begin : g_dev
    localparam dev_kind_e KIND = dev_kind(d);

    logic      p_tx_valid [LANES], p_tx_ready [LANES];
    logic      p_rx_valid [LANES], p_rx_commit [LANES], p_rx_ready [LANES];
    aer_addr_t p_rx_addr  [LANES];
    logic      tx_valid, tx_ready, rx_valid, rx_ready;
    aer_addr_t rx_addr;

    for (genvar l = 0; l < LANES; l++) begin : g_l
      assign bus_tx_valid[l][d] = p_tx_valid[l];
      assign p_tx_ready[l]      = bus_tx_ready[l][d];
      assign p_rx_valid[l]      = bus_rx_valid[l][d];
      assign p_rx_commit[l]     = bus_rx_commit[l][d];
      assign p_rx_addr[l]       = bus_rx_addr[l][d];
      assign bus_rx_ready[l][d] = p_rx_ready[l];
    end

    bus_port #(.LANES(LANES)) u_port (
      .clk, .rst_n,
      .lane_en      (lane_en[d]),
      .dev_tx_valid (tx_valid),
      .dev_tx_ready (tx_ready),
      .tx_valid     (p_tx_valid),
      .tx_ready     (p_tx_ready),
      .rx_valid     (p_rx_valid),
      .rx_commit    (p_rx_commit),
      .rx_addr      (p_rx_addr),
      .rx_ready     (p_rx_ready),
      .dev_rx_valid (rx_valid),
      .dev_rx_ready (rx_ready),
      .dev_rx_addr  (rx_addr),
      .rx_contend   (dev_contend[d])
    );

    if (KIND == DEV_SENSOR) begin : g_sensor
      assign tx_valid       = sensor_valid;
      assign sensor_ready   = tx_ready;
      assign dev_tx_addr[d] = sensor_addr;
      assign rx_ready       = 1'b1;          // nothing is delivered to a sensor
      assign dev_busy[d]    = 1'b0;
      assign dev_fire[d]    = '0;
      assign dev_stall[d]   = '0;
      assign dev_drop[d]    = rx_valid;
    end else if (KIND == DEV_ACTUATOR) begin : g_actuator
      assign tx_valid       = 1'b0;
      assign dev_tx_addr[d] = '0;
      assign act_valid      = rx_valid;
      assign act_addr       = rx_addr;
      assign rx_ready       = act_ready;
      assign dev_busy[d]    = 1'b0;
      assign dev_fire[d]    = '0;
      assign dev_stall[d]   = '0;
      assign dev_drop[d]    = 1'b0;
    end else begin : g_core
      localparam int unsigned NL2 = (KIND == DEV_LITTLE1) ? LIT1_L2 :
                                    (KIND == DEV_LITTLE2) ? LIT2_L2 :
                                    (KIND == DEV_BIG1)    ? BIG1_L2 : BIG2_L2;
      localparam int unsigned NL1 = (KIND == DEV_LITTLE1) ? LIT1_L1 :
                                    (KIND == DEV_LITTLE2) ? LIT2_L1 :
                                    (KIND == DEV_BIG1)    ? BIG1_L1 : BIG2_L1;
      mubrain_core #(
        .N_L2(NL2), .N_L1(NL1), .DEV_ID(d), .FIFO_DEPTH(FIFO_DEPTH)
      ) u_core (
        .clk, .rst_n, .clr,
        .cfg       (core_cfg),
        .in_valid  (rx_valid),
        .in_ready  (rx_ready),
        .in_addr   (rx_addr),
        .out_valid (tx_valid),
        .out_ready (tx_ready),
        .out_addr  (dev_tx_addr[d]),
        .busy      (dev_busy[d]),
        .fire      (dev_fire[d]),
        .stall     (dev_stall[d]),
        .drop      (dev_drop[d])
      );
    end
  end

endmodule
