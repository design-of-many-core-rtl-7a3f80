// bus_controller: maps inter-device communications onto the segmented bus.
//
// The controller holds a table of up to N_ROUTES routes, each naming a
// sending device, a receiving device and the lane to use. The table is
// written before an application is admitted (the mapping is found offline by
// profiling the application's traffic); afterwards no routing decision is
// taken at run time. From the table the controller derives the setting of
// every segmentation switch:
//   - sender left of receiver: the sender's switch injects rightward, the
//     switches in between pass rightward, the receiver's switch delivers
//     from the left; leftward routes are the mirror image;
//   - sender and receiver in the same column: the switch connects them
//     locally and no segment is used.
// Routes from one sender on one lane share segments (multicast). The
// controller also reports which segments are used by some route
// (seg_power: the others can stay powered down), on which lanes each device
// sends (tx_lane_en), and a conflict flag when two routes would need the
// same segment for different senders, the same segment in both directions,
// or different directions into the same device on one lane.
//
// Timing: the derived settings are registered; a table write takes effect on
// the switches two clock edges later.
//
// The route table and the derivation rules are this design's construction of
// the controller the platform describes only by its task.
module bus_controller
  import mubrain_pkg::*;
#(
  parameter int unsigned LANES    = 2,
  parameter int unsigned N_ROUTES = 16,
  localparam int unsigned RW      = (N_ROUTES > 1) ? $clog2(N_ROUTES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          route_we,
  input  logic [RW-1:0] route_idx,
  input  route_t        route_wdata,
  output sw_cfg_t       sw_cfg     [LANES][N_COL],
  output logic [N_COL-2:0] seg_power [LANES],
  output logic [LANES-1:0] tx_lane_en [N_DEV],
  output logic          conflict
);

  route_t table_q [N_ROUTES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_ROUTES; r++) table_q[r] <= '0;
    end else if (route_we) begin
      table_q[route_idx] <= route_wdata;
    end
  end

  // ---- derive the switch settings ----------------------------------------
  sw_cfg_t          cfg_d   [LANES][N_COL];
  logic [N_COL-2:0] r_use   [LANES];
  logic [N_COL-2:0] l_use   [LANES];
  logic [LANES-1:0] txen_d  [N_DEV];
  logic             conf_d;

  always_comb begin
    int unsigned sc, dc, ln;
    logic ss, ds;
    sc = 0;
    dc = 0;
    ln = 0;
    ss = 1'b0;
    ds = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      r_use[l] = '0;
      l_use[l] = '0;
      for (int c = 0; c < N_COL; c++) begin
        cfg_d[l][c] = '0;
        cfg_d[l][c].rx_from = {RX_LEFT, RX_LEFT};
      end
    end
    for (int d = 0; d < N_DEV; d++) txen_d[d] = '0;
    conf_d = 1'b0;

    for (int r = 0; r < N_ROUTES; r++) begin
      if (table_q[r].valid && 32'(table_q[r].lane) < LANES &&
          32'(table_q[r].src) < N_DEV && 32'(table_q[r].dst) < N_DEV) begin
        ln = 32'(table_q[r].lane);
        sc = 32'(table_q[r].src) / 2;
        ss = table_q[r].src[0];
        dc = 32'(table_q[r].dst) / 2;
        ds = table_q[r].dst[0];
        txen_d[table_q[r].src][ln] = 1'b1;

        if (sc < dc) begin
          if (cfg_d[ln][sc].inj_r && cfg_d[ln][sc].inj_r_side != ss) conf_d = 1'b1;
          cfg_d[ln][sc].inj_r      = 1'b1;
          cfg_d[ln][sc].inj_r_side = ss;
          for (int c = 0; c < N_COL; c++) begin
            if (c > sc && c < dc) cfg_d[ln][c].pass_r = 1'b1;
            if (c >= sc && c < dc) r_use[ln][c] = 1'b1;
          end
          if (cfg_d[ln][dc].rx_en[ds] && cfg_d[ln][dc].rx_from[ds] != RX_LEFT) conf_d = 1'b1;
          cfg_d[ln][dc].rx_en[ds]   = 1'b1;
          cfg_d[ln][dc].rx_from[ds] = RX_LEFT;
        end else if (sc > dc) begin
          if (cfg_d[ln][sc].inj_l && cfg_d[ln][sc].inj_l_side != ss) conf_d = 1'b1;
          cfg_d[ln][sc].inj_l      = 1'b1;
          cfg_d[ln][sc].inj_l_side = ss;
          for (int c = 0; c < N_COL; c++) begin
            if (c > dc && c < sc) cfg_d[ln][c].pass_l = 1'b1;
            if (c >= dc && c < sc) l_use[ln][c] = 1'b1;
          end
          if (cfg_d[ln][dc].rx_en[ds] && cfg_d[ln][dc].rx_from[ds] != RX_RIGHT) conf_d = 1'b1;
          cfg_d[ln][dc].rx_en[ds]   = 1'b1;
          cfg_d[ln][dc].rx_from[ds] = RX_RIGHT;
        end else begin
          // same column: local connection through the vertical stub
          if (ss == ds) conf_d = 1'b1;
          if (cfg_d[ln][sc].loc && cfg_d[ln][sc].loc_side != ss) conf_d = 1'b1;
          cfg_d[ln][sc].loc      = 1'b1;
          cfg_d[ln][sc].loc_side = ss;
          if (cfg_d[ln][dc].rx_en[ds] && cfg_d[ln][dc].rx_from[ds] != RX_LOCAL) conf_d = 1'b1;
          cfg_d[ln][dc].rx_en[ds]   = 1'b1;
          cfg_d[ln][dc].rx_from[ds] = RX_LOCAL;
        end
      end
    end

    // a sender may not enter a segment run that another sender already uses
    for (int l = 0; l < LANES; l++) begin
      for (int c = 0; c < N_COL; c++) begin
        if (cfg_d[l][c].pass_r && cfg_d[l][c].inj_r) conf_d = 1'b1;
        if (cfg_d[l][c].pass_l && cfg_d[l][c].inj_l) conf_d = 1'b1;
      end
      if ((r_use[l] & l_use[l]) != '0) conf_d = 1'b1;
    end
  end

  // ---- registered outputs -------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) begin
        seg_power[l] <= '0;
        for (int c = 0; c < N_COL; c++) sw_cfg[l][c] <= '0;
      end
      for (int d = 0; d < N_DEV; d++) tx_lane_en[d] <= '0;
      conflict <= 1'b0;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        seg_power[l] <= r_use[l] | l_use[l];
        for (int c = 0; c < N_COL; c++) sw_cfg[l][c] <= cfg_d[l][c];
      end
      for (int d = 0; d < N_DEV; d++) tx_lane_en[d] <= txen_d[d];
      conflict <= conf_d;
    end
  end

endmodule
