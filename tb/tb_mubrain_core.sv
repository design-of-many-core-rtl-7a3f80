// tb_mubrain_core: a 16 x 8 x 16 core against a three-layer integer
// reference model kept here. All weights are programmed at random, the
// thresholds of the three layers are set through the configuration port, and
// random address events (some beyond the core, which must be dropped) are
// sent while the AER output is randomly not ready. Every output event is
// compared in order with the model, including its {DEV_ID, neuron} address.
// A last phase measures the pipeline latency: with single +1 paths and zero
// thresholds, an accepted event leaves AER out 5 cycles later.
module tb_mubrain_core;
  import mubrain_pkg::*;
  localparam int unsigned NL2 = 16, NL1 = 8, DEV = 5;

  logic clk = 0, rst_n = 0, clr = 0;
  core_cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  aer_addr_t in_addr = '0, out_addr;
  logic busy, drop;
  logic [2:0] fire, stall;
  int checks = 0, failures = 0;

  mubrain_core #(.N_L2(NL2), .N_L1(NL1), .DEV_ID(DEV)) dut (
    .clk, .rst_n, .clr, .cfg, .in_valid, .in_ready, .in_addr,
    .out_valid, .out_ready, .out_addr, .busy, .fire, .stall, .drop);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int WIN [NL2];
  int W21 [NL2][NL1];
  int W10 [NL1][N_L0];
  int V2 [NL2], V1 [NL1], V0 [N_L0];
  int TH [3], VR [3];
  int exp_q[$];
  int n_fire [3], n_stall [3], n_drop;

  function automatic bit upd(ref int v, input int w, input int th, input int vr);
    int s = v + w;
    if (s > th) begin v = vr; return 1; end
    v = (s < -128) ? -128 : s;
    return 0;
  endfunction

  task automatic cfg_write(cfg_target_e t, int pre, int post, int data);
    @(negedge clk);
    cfg.we = 1; cfg.dev = dev_id_t'(DEV); cfg.target = t;
    cfg.pre = 14'(pre); cfg.post = 12'(post); cfg.data = vmem_t'(data);
    @(negedge clk) cfg.we = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready && int'(in_addr) < NL2) begin
      int a;
      a = int'(in_addr);
      if (upd(V2[a], WIN[a], TH[2], VR[2]))
        for (int j = 0; j < NL1; j++)
          if (upd(V1[j], W21[a][j], TH[1], VR[1]))
            for (int k = 0; k < N_L0; k++)
              if (upd(V0[k], W10[j][k], TH[0], VR[0])) exp_q.push_back(DEV * 16 + k);
    end
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && exp_q[0] == int'(out_addr), "output event");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    for (int l = 0; l < 3; l++) begin
      n_fire[l]  += int'(fire[l]);
      n_stall[l] += int'(stall[l]);
    end
    n_drop += int'(drop);
  end

  function automatic int rw();  // random weight biased to excitation
    int r = $urandom_range(0, 7);
    return (r < 4) ? 1 : (r < 6) ? 0 : (r == 6) ? -1 : -2;
  endfunction

  initial begin
    int lat;
    cfg = '0;
    foreach (n_fire[l]) begin n_fire[l] = 0; n_stall[l] = 0; end
    n_drop = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    TH = '{1, 1, 0}; VR = '{0, 0, 0};   // index = layer (0: l0, 1: l1, 2: l2)
    for (int l = 0; l < 3; l++) begin
      cfg_write(CFG_VTH, 0, l, TH[l]);
      cfg_write(CFG_VREST, 0, l, VR[l]);
    end
    // a write for another core must be ignored
    @(negedge clk);
    cfg.we = 1; cfg.dev = dev_id_t'(DEV + 1); cfg.target = CFG_VTH; cfg.post = 12'd0; cfg.data = 8'sd100;
    @(negedge clk) cfg.we = 0;
    for (int a = 0; a < NL2; a++) begin WIN[a] = rw(); cfg_write(CFG_W_IN, a, 0, WIN[a]); end
    for (int a = 0; a < NL2; a++) for (int j = 0; j < NL1; j++) begin
      W21[a][j] = rw(); cfg_write(CFG_W_21, a, j, W21[a][j]);
    end
    for (int j = 0; j < NL1; j++) for (int k = 0; k < N_L0; k++) begin
      W10[j][k] = rw(); cfg_write(CFG_W_10, j, k, W10[j][k]);
    end
    while (busy) @(negedge clk);
    foreach (V2[i]) V2[i] = 0;
    foreach (V1[i]) V1[i] = 0;
    foreach (V0[i]) V0[i] = 0;

    fork
      for (int e = 0; e < 400; e++) begin
        @(negedge clk);
        in_valid = 1;
        in_addr  = aer_addr_t'(($urandom_range(0, 9) == 0) ? $urandom_range(NL2, 1000) : $urandom_range(0, NL2 - 1));
        @(posedge clk); while (!in_ready) @(posedge clk);
        @(negedge clk) in_valid = 0;
      end
      for (int c = 0; c < 20000; c++) begin
        @(negedge clk) out_ready = ($urandom_range(0, 4) == 0);
      end
    join_any
    @(negedge clk) out_ready = 1;
    while (busy || in_valid) @(negedge clk);
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "all expected output events seen");
    for (int l = 0; l < 3; l++) check(n_fire[l] > 0, "each layer fired");
    check(n_stall[0] + n_stall[1] + n_stall[2] > 0, "a layer stalled");
    check(n_drop > 0, "out-of-range event dropped");

    // latency through the three layers
    clr = 1; @(negedge clk) clr = 0;
    TH = '{0, 0, 0};
    for (int l = 0; l < 3; l++) cfg_write(CFG_VTH, 0, l, 0);
    cfg_write(CFG_W_IN, 3, 0, 1);
    for (int j = 0; j < NL1; j++) begin W21[3][j] = (j == 0); cfg_write(CFG_W_21, 3, j, W21[3][j]); end
    for (int k = 0; k < N_L0; k++) begin W10[0][k] = (k == 0); cfg_write(CFG_W_10, 0, k, W10[0][k]); end
    WIN[3] = 1;
    while (busy) @(negedge clk);
    foreach (V2[i]) V2[i] = 0;
    foreach (V1[i]) V1[i] = 0;
    foreach (V0[i]) V0[i] = 0;
    in_valid = 1; in_addr = 14'd3;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk) in_valid = 0;
    lat = 0;
    while (!out_valid && lat < 100) begin @(posedge clk); lat++; #1; end
    check(lat == 5, "AER in -> AER out latency 5 cycles");
    check(out_addr == aer_addr_t'(DEV * 16), "address tag {DEV_ID, neuron}");
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "latency event matched model");
    $display("fires l0/l1/l2 = %0d/%0d/%0d stalls %0d/%0d/%0d drops %0d lat %0d",
             n_fire[0], n_fire[1], n_fire[2], n_stall[0], n_stall[1], n_stall[2], n_drop, lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
