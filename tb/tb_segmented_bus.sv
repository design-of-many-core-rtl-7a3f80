// tb_segmented_bus: two lanes configured by the bus controller with
//   lane 0: 6 -> 7 (local), 7 -> 3 (leftward), 7 -> 8 (rightward, multicast
//           with 7 -> 3), 0 -> 1 (local, column 0)
//   lane 1: 3 -> 8 (rightward), 2 -> 0 (leftward, segment 0)
// Random valid, address and ready values are applied to every device port.
// Expected deliveries are computed from the route list alone: a receiver sees
// exactly its sender's event, other devices see nothing, and a sender's ready
// is the AND of its receivers' readies. Paths on disjoint segments must
// carry events in the same cycle; idle segments must carry nothing.
module tb_segmented_bus;
  import mubrain_pkg::*;
  localparam int unsigned LANES = 2;

  logic clk = 0, rst_n = 0, route_we = 0;
  logic [3:0] route_idx = '0;
  route_t route_wdata = '0;
  sw_cfg_t sw_cfg [LANES][N_COL];
  logic [N_COL-2:0] seg_power [LANES], seg_busy [LANES];
  logic [LANES-1:0] tx_lane_en [N_DEV];
  logic conflict;

  logic      tx_valid [LANES][N_DEV], tx_ready [LANES][N_DEV];
  logic      rx_valid [LANES][N_DEV], rx_commit [LANES][N_DEV], rx_ready [LANES][N_DEV];
  aer_addr_t tx_addr [N_DEV], rx_addr [LANES][N_DEV];
  int checks = 0, failures = 0, concurrent = 0, multicast = 0;

  bus_controller #(.LANES(LANES)) u_ctrl (
    .clk, .rst_n, .route_we, .route_idx, .route_wdata, .sw_cfg, .seg_power, .tx_lane_en, .conflict);
  segmented_bus #(.LANES(LANES)) dut (
    .sw_cfg, .tx_valid, .tx_addr, .tx_ready, .rx_valid, .rx_commit, .rx_addr, .rx_ready, .seg_busy);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s t=%0t", what, $time); end
  endtask

  int R_SRC [6] = '{6, 7, 7, 0, 3, 2};
  int R_DST [6] = '{7, 3, 8, 1, 8, 0};
  int R_LN  [6] = '{0, 0, 0, 0, 1, 1};

  initial begin
    foreach (tx_addr[d]) tx_addr[d] = '0;
    for (int l = 0; l < LANES; l++) for (int d = 0; d < N_DEV; d++) begin
      tx_valid[l][d] = 0; rx_ready[l][d] = 1;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      route_we = 1; route_idx = 4'(r);
      route_wdata = '{valid: 1'b1, src: dev_id_t'(R_SRC[r]), dst: dev_id_t'(R_DST[r]), lane: 2'(R_LN[r])};
    end
    @(negedge clk) route_we = 0;
    repeat (2) @(negedge clk);
    check(!conflict, "route set is legal");

    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int d = 0; d < N_DEV; d++) tx_addr[d] = aer_addr_t'($urandom);
      for (int l = 0; l < LANES; l++) for (int d = 0; d < N_DEV; d++) begin
        tx_valid[l][d] = 1'($urandom);
        rx_ready[l][d] = ($urandom_range(0, 3) != 0);
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        for (int d = 0; d < N_DEV; d++) begin
          int src;
          bit exp_rdy, has_route;
          src = -1; exp_rdy = 1; has_route = 0;
          for (int r = 0; r < 6; r++) if (R_LN[r] == l && R_DST[r] == d) src = R_SRC[r];
          if (src < 0) check(!rx_valid[l][d], "no delivery without route");
          else check(rx_valid[l][d] == tx_valid[l][src] && (!rx_valid[l][d] || rx_addr[l][d] == tx_addr[src]),
                     "delivery from the routed sender");
          if (src >= 0 && failures < 6 && rx_valid[l][d] != tx_valid[l][src]) $display("  lane %0d dev %0d src %0d rxv %0b txv %0b", l, d, src, rx_valid[l][d], tx_valid[l][src]);
          for (int r = 0; r < 6; r++)
            if (R_LN[r] == l && R_SRC[r] == d) begin has_route = 1; exp_rdy &= rx_ready[l][R_DST[r]]; end
          if (has_route) check(tx_ready[l][d] == exp_rdy, "sender ready = AND of receivers");
        end
        // a receiver commits only when every receiver of its sender is ready
        for (int d = 0; d < N_DEV; d++) begin
          int src;
          bit all_rdy;
          src = -1; all_rdy = 1;
          for (int r = 0; r < 6; r++) if (R_LN[r] == l && R_DST[r] == d) src = R_SRC[r];
          if (src >= 0) begin
            for (int r = 0; r < 6; r++)
              if (R_LN[r] == l && R_SRC[r] == src) all_rdy &= rx_ready[l][R_DST[r]];
            check(rx_commit[l][d] == (rx_valid[l][d] && all_rdy), "commit = request AND all receivers ready");
          end else check(!rx_commit[l][d], "no commit without route");
        end
        check((seg_busy[l] & ~seg_power[l]) == '0, "unpowered segments stay idle");
      end
      if (rx_valid[0][3] && rx_valid[0][8]) multicast++;
      if (rx_valid[1][8] && rx_valid[1][0] && rx_valid[0][1]) concurrent++;
    end
    check(multicast > 0, "multicast delivery seen");
    check(concurrent > 0, "concurrent paths on one lane and across lanes seen");
    check(seg_power[0] == 4'b1110 && seg_power[1] == 4'b1111, "segment power");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
