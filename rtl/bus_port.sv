// bus_port: attachment of one device to the parallel bus lanes.
//
// Send side: an event from the device is offered on every lane on which the
// bus controller has mapped a route from this device (lane_en). Each lane
// takes it when the receivers of that lane are ready; lanes that have taken
// it are remembered, and the device is released when all have. An event from
// a device with no route is consumed and discarded.
// Receive side: events that arrive for this device on several lanes in the
// same cycle are served one at a time, round robin over the lanes. The
// choice is made on the lanes' requests (rx_valid); the device sees an event
// only in the cycle the chosen lane commits it (rx_commit: all receivers of
// the sender ready), so each event of a multicast is taken exactly once by
// every receiver. The pointer moves on after every cycle in which a lane was
// chosen, whether or not it committed, so a multicast held up by another
// receiver cannot lock out the other lanes.
//
// Both sides are combinational apart from the remembered lanes and the
// round-robin pointer, so an uncontested event crosses the port in the cycle
// it is offered. This port is this design's own: the platform description
// does not say how a device shares its ports among the lanes.
module bus_port
  import mubrain_pkg::*;
#(
  parameter int unsigned LANES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LANES-1:0] lane_en,
  // device -> lanes
  input  logic             dev_tx_valid,
  output logic             dev_tx_ready,
  output logic             tx_valid [LANES],
  input  logic             tx_ready [LANES],
  // lanes -> device
  input  logic             rx_valid [LANES],
  input  logic             rx_commit [LANES],
  input  aer_addr_t        rx_addr  [LANES],
  output logic             rx_ready [LANES],
  output logic             dev_rx_valid,
  input  logic             dev_rx_ready,
  output aer_addr_t        dev_rx_addr,
  output logic             rx_contend     // several lanes offered at once
);

  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;

  // ---- send ----------------------------------------------------------------
  logic [LANES-1:0] sent_q, hs;
  logic             done;

  always_comb begin
    done = 1'b1;
    for (int l = 0; l < LANES; l++) begin
      tx_valid[l] = dev_tx_valid && lane_en[l] && !sent_q[l];
      hs[l]       = tx_valid[l] && tx_ready[l];
      if (lane_en[l] && !sent_q[l] && !hs[l]) done = 1'b0;
    end
    dev_tx_ready = done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       sent_q <= '0;
    else if (dev_tx_valid && done)    sent_q <= '0;
    else if (dev_tx_valid)            sent_q <= sent_q | hs;
  end

  // ---- receive -------------------------------------------------------------
  logic [LW-1:0] ptr_q, sel;
  logic          any;
  int unsigned   nvalid;

  always_comb begin
    any    = 1'b0;
    sel    = ptr_q;
    nvalid = 0;
    for (int k = 0; k < LANES; k++) begin
      int unsigned l;
      l = (32'(ptr_q) + k) % LANES;
      if (rx_valid[l]) nvalid++;
      if (!any && rx_valid[l]) begin
        any = 1'b1;
        sel = LW'(l);
      end
    end
    for (int l = 0; l < LANES; l++) rx_ready[l] = any && (sel == LW'(l)) && dev_rx_ready;
    dev_rx_valid = any && rx_commit[sel];
    dev_rx_addr  = rx_addr[sel];
    rx_contend   = (nvalid > 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (any)
      ptr_q <= (32'(sel) == LANES - 1) ? '0 : sel + 1'b1;
  end

endmodule
