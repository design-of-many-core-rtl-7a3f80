// segmented_bus: LANES parallel segmented bus lanes linking N_DEV devices.
//
// Every lane runs past N_COL columns and is cut into N_COL-1 segments by one
// seg_switch per column; the two devices of a column (device d = 2*column +
// side) reach every lane through their column's switches. The bus controller
// sets every switch (sw_cfg), which decides which segments form a path from a
// sending device to one or more receivers. Paths on the same lane that use
// disjoint segments carry events at the same time; a second lane gives a
// second, independent set of paths.
//
// Per lane and device the bus offers a send port (tx_*) and a receive port
// (rx_*), valid/ready with the AER address as data. On the receive side
// rx_valid is the request and rx_commit says the event is taken in this
// cycle: it is high only when every receiver of the sender on this lane is
// ready, so a multicast event reaches all its receivers in the same cycle.
// A device sending on several lanes, or receiving from several, is served by
// its bus_port. The bus is combinational: an event crosses any number of
// segments in the cycle in which its valid and all readies on the path are
// high. seg_busy reports which segments carried an event in this cycle.
//
// The Verilator lint reports UNOPTFLAT on the per-lane r_out/l_out/r_rdy/l_rdy arrays:
// rightward data flows from switch c to c+1 and leftward data and readies
// from c+1 to c, all through the same arrays, which the tool sees as one
// signal feeding itself. There is no real combinational loop: requests never
// depend on readies, readies never on 'go', and each element depends only on
// elements further along its own direction.
//
// The parallel lanes, their segments and switches follow the platform
// description (two lanes and five switches per lane as drawn); the
// handshake is this design's choice.
module segmented_bus
  import mubrain_pkg::*;
#(
  parameter int unsigned LANES = 2
) (
  input  sw_cfg_t   sw_cfg   [LANES][N_COL],
  input  logic      tx_valid [LANES][N_DEV],
  input  aer_addr_t tx_addr  [N_DEV],
  output logic      tx_ready [LANES][N_DEV],
  output logic      rx_valid [LANES][N_DEV],
  output logic      rx_commit [LANES][N_DEV],
  output aer_addr_t rx_addr  [LANES][N_DEV],
  input  logic      rx_ready [LANES][N_DEV],
  output logic [N_COL-2:0] seg_busy [LANES]
);

  for (genvar ln = 0; ln < LANES; ln++) begin : g_lane
    // per switch c: what it puts on / takes from its neighbours
    seg_evt_t r_out [N_COL];   // onto segment c (right of switch c)
    seg_evt_t l_out [N_COL];   // onto segment c-1 (left of switch c)
    logic     r_rdy [N_COL];   // ready for segment c-1 rightward traffic
    logic     l_rdy [N_COL];   // ready for segment c leftward traffic

    for (genvar c = 0; c < N_COL; c++) begin : g_col
      seg_evt_t  r_in, l_in;
      logic      r_ready_in, l_ready_in;
      logic      txv [2], txr [2], rxv [2], rxc [2], rxr [2];
      aer_addr_t txa [2], rxa [2];

      assign r_in       = (c > 0)         ? r_out[(c > 0) ? c - 1 : 0]         : '0;
      assign l_in       = (c < N_COL - 1) ? l_out[(c < N_COL - 1) ? c + 1 : c] : '0;
      assign r_ready_in = (c < N_COL - 1) ? r_rdy[(c < N_COL - 1) ? c + 1 : c] : 1'b1;
      assign l_ready_in = (c > 0)         ? l_rdy[(c > 0) ? c - 1 : 0]         : 1'b1;

      for (genvar s = 0; s < 2; s++) begin : g_side
        assign txv[s] = tx_valid[ln][2*c+s];
        assign txa[s] = tx_addr[2*c+s];
        assign rxr[s] = rx_ready[ln][2*c+s];
        assign tx_ready[ln][2*c+s] = txr[s];
        assign rx_valid[ln][2*c+s] = rxv[s];
        assign rx_commit[ln][2*c+s] = rxc[s];
        assign rx_addr[ln][2*c+s]  = rxa[s];
      end

      seg_switch u_sw (
        .cfg         (sw_cfg[ln][c]),
        .tx_valid    (txv),
        .tx_addr     (txa),
        .tx_ready    (txr),
        .rx_valid    (rxv),
        .rx_commit   (rxc),
        .rx_addr     (rxa),
        .rx_ready    (rxr),
        .r_in        (r_in),
        .l_out       (l_out[c]),
        .r_ready_out (r_rdy[c]),
        .l_ready_in  (l_ready_in),
        .r_out       (r_out[c]),
        .l_in        (l_in),
        .r_ready_in  (r_ready_in),
        .l_ready_out (l_rdy[c])
      );
    end

    for (genvar c = 0; c < N_COL - 1; c++) begin : g_seg
      assign seg_busy[ln][c] = (r_out[c].valid && r_out[c].go) || (l_out[c+1].valid && l_out[c+1].go);
    end
  end

endmodule
