// mubrain_pkg: types and constants shared by the many-core big/little uBrain
// platform.
//
// Neuron arithmetic: 2-bit synaptic weights (the quantisation the platform is
// evaluated with) and an 8-bit signed membrane accumulator (this design's
// choice). Every core has 16 output (l0) neurons, as in all four core
// configurations; the AER address on the bus is 14 bits wide, enough to name
// any of the 16384 l2 neurons of the largest core.
//
// Platform map (Fig. "many-core big little" of the platform): five switch
// columns on each bus lane, two devices per column (one above the lanes, one
// below). Device d sits in column d/2, side d%2 (0 = above, 1 = below). The
// printed map is, left to right:
//   column 0: big core      / big core
//   column 1: big core      / little core
//   column 2: little core   / little core
//   column 3: sensor        / little core
//   column 4: big core      / actuator
// Which of the two big and two little configurations each core uses is not
// printed; this design gives each configuration to two cores (dev_kind).
package mubrain_pkg;

  localparam int unsigned W_BITS   = 2;   // synaptic weight width (signed)
  localparam int unsigned V_BITS   = 8;   // membrane accumulator width (signed)
  localparam int unsigned N_L0     = 16;  // output neurons per core, all configurations
  localparam int unsigned L0_AW    = 4;   // $clog2(N_L0)
  localparam int unsigned AER_W    = 14;  // AER address width on the bus

  localparam int unsigned N_COL    = 5;   // switch columns per lane
  localparam int unsigned N_DEV    = 2 * N_COL;
  localparam int unsigned DEV_W    = 4;   // $clog2(N_DEV)

  typedef logic signed [W_BITS-1:0] weight_t;
  typedef logic signed [V_BITS-1:0] vmem_t;
  typedef logic [AER_W-1:0]         aer_addr_t;
  typedef logic [DEV_W-1:0]         dev_id_t;

  // Neuron state of Fig. 2. FIRE_LEAK is transient: it lasts for the update
  // in which the threshold is crossed, so only SILENCE and INTEGRATE are stored.
  typedef enum logic [1:0] {
    ST_SILENCE   = 2'd0,
    ST_INTEGRATE = 2'd1,
    ST_FIRE_LEAK = 2'd2
  } neuron_phase_e;

  typedef struct packed {
    logic  integrating;   // 1: INTEGRATE, 0: SILENCE
    vmem_t vmem;
  } neuron_state_t;

  // Kinds of device on the bus and the four core configurations.
  typedef enum logic [2:0] {
    DEV_LITTLE1  = 3'd0,   // 256 x 64 x 16
    DEV_LITTLE2  = 3'd1,   // 1024 x 256 x 16
    DEV_BIG1     = 3'd2,   // 4096 x 1024 x 16
    DEV_BIG2     = 3'd3,   // 16384 x 4096 x 16
    DEV_SENSOR   = 3'd4,
    DEV_ACTUATOR = 3'd5
  } dev_kind_e;

  function automatic dev_kind_e dev_kind(int unsigned d);
    case (d)
      0: return DEV_BIG1;
      1: return DEV_BIG2;
      2: return DEV_BIG1;
      3: return DEV_LITTLE1;
      4: return DEV_LITTLE1;
      5: return DEV_LITTLE2;
      6: return DEV_SENSOR;
      7: return DEV_LITTLE2;
      8: return DEV_BIG2;
      default: return DEV_ACTUATOR;
    endcase
  endfunction

  // Core configuration programming (weights, thresholds, rest voltages).
  typedef enum logic [2:0] {
    CFG_W_IN  = 3'd0,   // one-to-one AER-in -> l2 weight, index = l2 neuron
    CFG_W_21  = 3'd1,   // l2 -> l1 weight, [pre = l2][post = l1]
    CFG_W_10  = 3'd2,   // l1 -> l0 weight, [pre = l1][post = l0]
    CFG_VTH   = 3'd3,   // threshold of layer 'post[1:0]' (0: l0, 1: l1, 2: l2)
    CFG_VREST = 3'd4    // rest voltage of layer 'post[1:0]'
  } cfg_target_e;

  typedef struct packed {
    logic        we;
    dev_id_t     dev;
    cfg_target_e target;
    logic [13:0] pre;
    logic [11:0] post;
    vmem_t       data;    // weights use data[W_BITS-1:0]
  } core_cfg_t;

  // One inter-device communication mapped onto a lane by the bus controller.
  typedef struct packed {
    logic    valid;
    dev_id_t src;
    dev_id_t dst;
    logic [1:0] lane;
  } route_t;

  // Where a switch takes the data it hands to a device below/above it.
  typedef enum logic [1:0] {
    RX_LEFT  = 2'd0,   // rightward traffic arriving on the segment to the left
    RX_RIGHT = 2'd1,   // leftward traffic arriving on the segment to the right
    RX_LOCAL = 2'd2    // the other device of the same column, via the vertical stub
  } rx_from_e;

  // Settings of one segmentation switch (one lane, one column).
  typedef struct packed {
    logic       inj_r;        // drive a device's event onto the right segment
    logic       inj_r_side;
    logic       inj_l;        // drive a device's event onto the left segment
    logic       inj_l_side;
    logic       loc;          // connect the two devices of the column
    logic       loc_side;     // side that sends on the local connection
    logic       pass_r;       // join left segment to right segment, data moving right
    logic       pass_l;       // join right segment to left segment, data moving left
    logic [1:0] rx_en;        // per side: hand lane data to that device
    rx_from_e [1:0] rx_from;  // per side: which direction it comes from
  } sw_cfg_t;

  // An event on a segment. 'valid' is the request; 'go' travels with it and
  // is high when every receiver of the sender is ready, so that all
  // receivers of a multicast take the event in the same cycle.
  typedef struct packed {
    logic      valid;
    logic      go;
    aer_addr_t addr;
  } seg_evt_t;

endpackage
