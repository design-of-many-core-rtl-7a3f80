// seg_switch: segmentation switch of one bus lane at one column.
//
// A bus lane is cut into segments; a switch sits between the segment to its
// left and the segment to its right and also meets the vertical stub that
// links the two devices of its column (one above the lanes, one below) to the
// lane. Under the control of the bus controller it can
//   - inject an event from either device onto the right segment (moving right)
//     or onto the left segment (moving left),
//   - join the two segments so traffic passes through, in either direction,
//   - deliver traffic arriving from the left, from the right, or from the
//     other device of the column (local connection) to either device.
// Several of these at once form multicast paths. An unused segment carries
// no event, so it need not be powered.
//
// Each segment carries a request (valid), the address and a 'go' bit, with a
// ready going back. The switch forms the ready of every path it takes part
// in as the AND of the readies of all receivers on that path; at the sender
// that AND becomes 'go' and travels forward with the event, so every receiver
// of a multicast takes the event in the same cycle (rx_commit) or none does.
// All logic is combinational; the lane adds no cycle. Requests never depend
// on ready and readies never on 'go', so chains of switches have no loop.
// (Inside a segmented_bus the lint still flags r_out/l_out as UNOPTFLAT,
// because the chained switches share arrays; see segmented_bus.)
//
// That lanes are cut by switches at the devices and that the controller
// programs them follows the platform description; the direction-split
// wiring, the local connection and the handshake are this design's choices.
module seg_switch
  import mubrain_pkg::*;
(
  input  sw_cfg_t   cfg,
  // devices of this column (index = side: 0 above the lanes, 1 below)
  input  logic      tx_valid [2],
  input  aer_addr_t tx_addr  [2],
  output logic      tx_ready [2],
  output logic      rx_valid [2],   // request: an event is offered
  output logic      rx_commit [2],  // the event is taken in this cycle
  output aer_addr_t rx_addr  [2],
  input  logic      rx_ready [2],
  // segment to the left
  input  seg_evt_t  r_in,      // rightward traffic arriving from the left
  output seg_evt_t  l_out,     // leftward traffic leaving to the left
  output logic      r_ready_out, // ready for r_in
  input  logic      l_ready_in,  // ready for l_out
  // segment to the right
  output seg_evt_t  r_out,     // rightward traffic leaving to the right
  input  seg_evt_t  l_in,      // leftward traffic arriving from the right
  input  logic      r_ready_in,  // ready for r_out
  output logic      l_ready_out  // ready for l_in
);

  seg_evt_t loc_evt;
  seg_evt_t rx_src [2];
  logic     loc_ready;

  always_comb begin
    // readies: AND of every receiver on each path
    r_ready_out = cfg.pass_r ? r_ready_in : 1'b1;
    l_ready_out = cfg.pass_l ? l_ready_in : 1'b1;
    loc_ready   = 1'b1;
    for (int s = 0; s < 2; s++) begin
      if (cfg.rx_en[s]) begin
        case (cfg.rx_from[s])
          RX_LEFT:  r_ready_out = r_ready_out && rx_ready[s];
          RX_RIGHT: l_ready_out = l_ready_out && rx_ready[s];
          default:  loc_ready   = loc_ready   && rx_ready[s];
        endcase
      end
    end

    for (int s = 0; s < 2; s++) begin
      tx_ready[s] = 1'b1;
      if (cfg.inj_r && cfg.inj_r_side == s[0]) tx_ready[s] = tx_ready[s] && r_ready_in;
      if (cfg.inj_l && cfg.inj_l_side == s[0]) tx_ready[s] = tx_ready[s] && l_ready_in;
      if (cfg.loc   && cfg.loc_side   == s[0]) tx_ready[s] = tx_ready[s] && loc_ready;
    end

    // traffic onto the segments
    if (cfg.inj_r)       r_out = '{valid: tx_valid[cfg.inj_r_side], go: tx_ready[cfg.inj_r_side],
                                   addr: tx_addr[cfg.inj_r_side]};
    else if (cfg.pass_r) r_out = r_in;
    else                 r_out = '0;

    if (cfg.inj_l)       l_out = '{valid: tx_valid[cfg.inj_l_side], go: tx_ready[cfg.inj_l_side],
                                   addr: tx_addr[cfg.inj_l_side]};
    else if (cfg.pass_l) l_out = l_in;
    else                 l_out = '0;

    if (cfg.loc)         loc_evt = '{valid: tx_valid[cfg.loc_side], go: tx_ready[cfg.loc_side],
                                   addr: tx_addr[cfg.loc_side]};
    else                 loc_evt = '0;

    // delivery to the devices of the column
    for (int s = 0; s < 2; s++) begin
      case (cfg.rx_from[s])
        RX_LEFT:  rx_src[s] = r_in;
        RX_RIGHT: rx_src[s] = l_in;
        default:  rx_src[s] = loc_evt;
      endcase
      rx_valid[s]  = cfg.rx_en[s] && rx_src[s].valid;
      rx_commit[s] = rx_valid[s] && rx_src[s].go;
      rx_addr[s]  = rx_src[s].addr;
    end

  end

endmodule
