// tb_many_core_full: the end-to-end scenario of tb_many_core_mubrain on the
// platform at its full size: no parameter is overridden, so the cores are
// little-1 256x64x16, little-2 1024x256x16, big-1 4096x1024x16 and big-2
// 16384x4096x16, and every hidden-layer row programmed has its full length.
//
// Application mapped onto the platform (three sub-networks in a pipeline):
//   sensor (d6) --lane 0, local--> little-2 core d7
//   d7 --lane 0, leftward--> little-1 core d3   } one multicast send
//   d7 --lane 0, rightward--> big-2 core d8     }
//   d3 --lane 1, rightward--> d8
//   d8 --lane 1, local--> actuator (d9)
// Weights are +1 on single paths and 0 elsewhere, thresholds 0, so every
// spike is passed on and the result is exact: sensor address a (0..7) gives
// actuator events 128+a (through d7 only) and 136+a (through d7 and d3).
// Two batches of images are sent, with a neuron-state clear between them;
// the actuator is randomly not ready. Counted mechanisms, each of which must
// occur: local, leftward, rightward and multicast transfers, two lanes
// delivering to one core in the same cycle, segments left unpowered while
// traffic flows, a routing conflict flagged (and removed), a layer stall,
// an out-of-range address dropped, and spikes in all three layers.
module tb_many_core_full;
  import mubrain_pkg::*;

  localparam int unsigned L1_D7 = 256;  // hidden-layer sizes of the three cores used
  localparam int unsigned L1_D3 = 64;
  localparam int unsigned L1_D8 = 4096;
  localparam int unsigned BATCH = 24;   // sensor events per batch

  logic clk = 0, rst_n = 0, clr = 0;
  core_cfg_t core_cfg = '0;
  logic route_we = 0;
  logic [3:0] route_idx = '0;
  route_t route_wdata = '0;
  logic sensor_valid = 0, sensor_ready, act_valid, act_ready = 1;
  aer_addr_t sensor_addr = '0, act_addr;
  logic conflict;
  logic [N_COL-2:0] seg_power [2], seg_busy [2];
  logic [N_DEV-1:0] dev_busy, dev_drop, dev_contend;
  logic [2:0] dev_fire [N_DEV], dev_stall [N_DEV];

  many_core_mubrain dut (
    .clk, .rst_n, .clr, .core_cfg, .route_we, .route_idx, .route_wdata,
    .sensor_valid, .sensor_ready, .sensor_addr, .act_valid, .act_ready, .act_addr,
    .conflict, .seg_power, .seg_busy, .dev_busy, .dev_fire, .dev_stall, .dev_drop, .dev_contend);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_local = 0, n_left = 0, n_right = 0, n_multi = 0, n_contend = 0, n_gated = 0,
      n_conflict = 0, n_stall = 0, n_drop = 0, n_fire [3] = '{0, 0, 0}, n_act = 0;
  int exp_cnt [int];

  initial begin : watchdog
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic cw(int dev, cfg_target_e t, int pre, int post, int data);
    @(negedge clk);
    core_cfg.we = 1; core_cfg.dev = dev_id_t'(dev); core_cfg.target = t;
    core_cfg.pre = 14'(pre); core_cfg.post = 12'(post); core_cfg.data = vmem_t'(data);
    @(negedge clk) core_cfg.we = 0;
  endtask

  task automatic route(int idx, bit v, int src, int dst, int lane);
    @(negedge clk);
    route_we = 1; route_idx = 4'(idx);
    route_wdata = '{valid: v, src: dev_id_t'(src), dst: dev_id_t'(dst), lane: 2'(lane)};
    @(negedge clk) route_we = 0;
    repeat (2) @(negedge clk);
  endtask

  // program one core: input weight on l2 neuron 'in', a +1 path in -> hidden
  // neuron 'h' (rest of the row 0), and h -> output neuron 'o'
  task automatic path(int dev, int nl1, int in, int h, int o);
    cw(dev, CFG_W_IN, in, 0, 1);
    for (int j = 0; j < nl1; j++) cw(dev, CFG_W_21, in, j, (j == h) ? 1 : 0);
    for (int k = 0; k < N_L0; k++) cw(dev, CFG_W_10, h, k, (k == o) ? 1 : 0);
  endtask

  // ---- monitors ------------------------------------------------------------
  always @(posedge clk) if (rst_n) begin
    if (sensor_valid && sensor_ready) n_local++;
    if (seg_busy[0][1] || seg_busy[0][2]) n_left++;
    if (seg_busy[1][2] || seg_busy[0][3]) n_right++;
    if (seg_busy[0][2] && seg_busy[0][3]) n_multi++;       // one send, both directions
    if (dev_contend[8]) n_contend++;
    if ((seg_busy[0] | seg_busy[1]) != '0 && (seg_power[0][0] == 1'b0 && seg_power[1][0] == 1'b0)) n_gated++;
    if (conflict) n_conflict++;
    for (int d = 0; d < N_DEV; d++) begin
      if (dev_stall[d] != '0) n_stall++;
      if (dev_drop[d]) n_drop++;
      for (int l = 0; l < 3; l++) n_fire[l] += int'(dev_fire[d][l]);
    end
    if (act_valid && act_ready) begin
      int a;
      a = int'(act_addr);
      n_act++;
      check(exp_cnt.exists(a) && exp_cnt[a] > 0, "actuator event expected");
      if (!(exp_cnt.exists(a) && exp_cnt[a] > 0) && failures < 8) $display("unexpected actuator address %0d at %0t", a, $time);
      if (exp_cnt.exists(a)) exp_cnt[a]--;
    end
  end

  task automatic send_batch(int n);
    fork
      for (int e = 0; e < n; e++) begin
        int a;
        a = (e % 7 == 6) ? 2000 : e % 8;    // every 7th event is beyond d7's 1024
        @(negedge clk);
        sensor_valid = 1; sensor_addr = aer_addr_t'(a);
        if (a < 8) begin
          exp_cnt[128 + a] = exp_cnt.exists(128 + a) ? exp_cnt[128 + a] + 1 : 1;
          exp_cnt[136 + a] = exp_cnt.exists(136 + a) ? exp_cnt[136 + a] + 1 : 1;
        end
        #1;
        while (!sensor_ready) begin @(negedge clk); #1; end
        @(posedge clk);                      // handshake on this edge
        @(negedge clk) sensor_valid = 0;
      end
      for (int c = 0; c < 400; c++) @(negedge clk) act_ready = ($urandom_range(0, 2) != 0);
    join
    @(negedge clk) act_ready = 1;
    while (dev_busy != '0) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    int left;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // routes; a clashing one first (device 5 would enter lane 1 where 3 -> 8 runs)
    route(0, 1, 6, 7, 0);
    route(1, 1, 7, 3, 0);
    route(2, 1, 7, 8, 0);
    route(3, 1, 3, 8, 1);
    route(4, 1, 8, 9, 1);
    check(!conflict, "mapped routes legal");
    route(5, 1, 5, 9, 1);
    check(conflict, "clashing route flagged");
    route(5, 0, 5, 9, 1);
    check(!conflict, "clash removed");
    // neurons: threshold 0 and rest 0 in every layer of d7, d3, d8
    foreach (dev_fire[d]) if (d == 7 || d == 3 || d == 8)
      for (int l = 0; l < 3; l++) begin cw(d, CFG_VTH, 0, l, 0); cw(d, CFG_VREST, 0, l, 0); end
    for (int a = 0; a < 8; a++) begin
      path(7, L1_D7, a, a, a);                    // d7: a -> 112+a
      path(3, L1_D3, 7 * 16 + a, a, a);           // d3: 112+a -> 48+a
      path(8, L1_D8, 7 * 16 + a, a, a);           // d8: 112+a -> 128+a
      path(8, L1_D8, 3 * 16 + a, a + 8, a + 8);   // d8: 48+a -> 136+a
    end
    while (dev_busy != '0) @(negedge clk);

    send_batch(BATCH);
    left = 0;
    foreach (exp_cnt[k]) left += exp_cnt[k];
    check(left == 0, "batch 1: every expected actuator event arrived");
    // clear all neuron states (next batch), then run again
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    while (dev_busy != '0) @(negedge clk);
    send_batch(BATCH);
    left = 0;
    foreach (exp_cnt[k]) left += exp_cnt[k];
    check(left == 0, "batch 2: every expected actuator event arrived");

    $display("act %0d local %0d left %0d right %0d multicast %0d contention %0d gated %0d conflict %0d stall %0d drop %0d fire %0d/%0d/%0d",
             n_act, n_local, n_left, n_right, n_multi, n_contend, n_gated, n_conflict, n_stall, n_drop,
             n_fire[0], n_fire[1], n_fire[2]);
    check(n_local > 0, "local transfer");
    check(n_left > 0, "leftward transfer");
    check(n_right > 0, "rightward transfer");
    check(n_multi > 0, "multicast transfer");
    check(n_contend > 0, "two lanes into one core");
    check(n_gated > 0, "unpowered segments during traffic");
    check(n_conflict > 0, "routing conflict flagged");
    check(n_stall > 0, "layer stall");
    check(n_drop > 0, "out-of-range address dropped");
    check(n_fire[0] > 0 && n_fire[1] > 0 && n_fire[2] > 0, "spikes in all layers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
