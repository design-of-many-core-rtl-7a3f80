// tb_bus_controller: writes route tables by hand and compares the derived
// switch settings, segment power, sender lanes and conflict flag with values
// worked out here for the 5-column, 2-lane platform:
//   lane 0: device 6 (col 3, above) -> 7 (col 3, below): local connection
//           device 7 -> 3 (col 1): leftward over segments 1, 2
//           device 7 -> 8 (col 4): rightward over segment 3
//   lane 1: device 3 -> 8: rightward over segments 1, 2, 3
// then adds routes that clash and checks that the conflict flag rises and
// falls again when they are removed. Settings appear two edges after a write.
module tb_bus_controller;
  import mubrain_pkg::*;
  localparam int unsigned LANES = 2, NR = 8;

  logic clk = 0, rst_n = 0, route_we = 0;
  logic [2:0] route_idx = '0;
  route_t route_wdata = '0;
  sw_cfg_t sw_cfg [LANES][N_COL];
  logic [N_COL-2:0] seg_power [LANES];
  logic [LANES-1:0] tx_lane_en [N_DEV];
  logic conflict;
  int checks = 0, failures = 0;

  bus_controller #(.LANES(LANES), .N_ROUTES(NR)) dut (
    .clk, .rst_n, .route_we, .route_idx, .route_wdata, .sw_cfg, .seg_power, .tx_lane_en, .conflict);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(int idx, bit v, int src, int dst, int lane);
    @(negedge clk);
    route_we = 1; route_idx = 3'(idx);
    route_wdata = '{valid: v, src: dev_id_t'(src), dst: dev_id_t'(dst), lane: 2'(lane)};
    @(negedge clk) route_we = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(seg_power[0] == 0 && seg_power[1] == 0 && !conflict, "empty table: nothing powered");
    wr(0, 1, 6, 7, 0);
    wr(1, 1, 7, 3, 0);
    wr(2, 1, 7, 8, 0);
    wr(3, 1, 3, 8, 1);
    check(!conflict, "legal table: no conflict");
    check(seg_power[0] == 4'b1110, "lane 0 powers segments 1..3 only");
    check(seg_power[1] == 4'b1110, "lane 1 powers segments 1..3 only");
    check(tx_lane_en[6] == 2'b01 && tx_lane_en[7] == 2'b01 && tx_lane_en[3] == 2'b10 &&
          tx_lane_en[8] == 2'b00, "sender lanes");
    // lane 0, column 3: local 6 -> 7, 7 injects both ways
    check(sw_cfg[0][3].loc && sw_cfg[0][3].loc_side == 1'b0, "col 3 local from above");
    check(sw_cfg[0][3].rx_en == 2'b10 && sw_cfg[0][3].rx_from[1] == RX_LOCAL, "col 3 delivers locally below");
    check(sw_cfg[0][3].inj_l && sw_cfg[0][3].inj_l_side == 1'b1, "col 3 injects leftward from below");
    check(sw_cfg[0][3].inj_r && sw_cfg[0][3].inj_r_side == 1'b1, "col 3 injects rightward from below");
    check(sw_cfg[0][2].pass_l && !sw_cfg[0][2].pass_r && sw_cfg[0][2].rx_en == 2'b00, "col 2 passes leftward");
    check(sw_cfg[0][1].rx_en == 2'b10 && sw_cfg[0][1].rx_from[1] == RX_RIGHT && !sw_cfg[0][1].pass_l,
          "col 1 delivers from the right to device 3");
    check(sw_cfg[0][4].rx_en == 2'b01 && sw_cfg[0][4].rx_from[0] == RX_LEFT, "col 4 delivers to device 8");
    check(sw_cfg[0][0] == '0 || (sw_cfg[0][0].rx_en == 0 && !sw_cfg[0][0].inj_r && !sw_cfg[0][0].pass_r),
          "col 0 idle on lane 0");
    // lane 1
    check(sw_cfg[1][1].inj_r && sw_cfg[1][1].inj_r_side == 1'b1, "lane 1 col 1 injects from device 3");
    check(sw_cfg[1][2].pass_r && sw_cfg[1][3].pass_r, "lane 1 cols 2, 3 pass rightward");
    check(sw_cfg[1][4].rx_en == 2'b01 && sw_cfg[1][4].rx_from[0] == RX_LEFT, "lane 1 col 4 delivers to 8");

    // clash 1: device 5 (col 2) enters lane 1 where 3 -> 8 passes
    wr(4, 1, 5, 9, 1);
    check(conflict, "sender entering a used run: conflict");
    wr(4, 0, 5, 9, 1);
    check(!conflict, "removed: conflict clears");
    // clash 2: rightward 0 -> 2 and leftward 4 -> 1 share segment 0 of lane 1
    wr(5, 1, 0, 2, 1);
    check(!conflict, "0 -> 2 on lane 1 is legal");
    wr(6, 1, 4, 1, 1);
    check(conflict, "both directions on one segment: conflict");
    wr(6, 0, 4, 1, 1);
    // clash 3: device 8 receives on lane 0 from the left and from the right
    wr(6, 1, 9, 8, 0);
    check(conflict, "device 8 fed from the left and locally on one lane: conflict");
    wr(6, 0, 9, 8, 0);
    check(!conflict, "final table legal");
    check(seg_power[1] == 4'b1111, "lane 1 now powers all segments");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
