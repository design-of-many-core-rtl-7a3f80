// tb_workload_conv: a convolution + pooling sub-network, of the kind a
// spiking CNN is cut into, run on one little-1 core at its full size
// (256 x 64 x 16, the core's default parameters).
//
// Mapping:
//   l2 (256) : a 16 x 16 binary input image, one neuron per pixel, input
//              weight +1 and threshold 0, so every input event fires.
//   l1 (64)  : an 8 x 8 feature map: neuron (r, c) sees the 3 x 3 window of
//              pixels centred on (2r, 2c) (stride 2, clipped at the border)
//              through one shared random kernel of 2-bit weights;
//              threshold 1.
//   l0 (16)  : a 4 x 4 pooled map: neuron (i, j) sums the 2 x 2 block of
//              feature neurons (2i..2i+1, 2j..2j+1) with weight +1;
//              threshold 0.
// Three images are streamed, each as three frames of random pixel spikes,
// with a neuron-state clear between images. The testbench keeps an
// event-by-event model of the three layers and compares every output event,
// in order, with it; the AER output is randomly not ready, so the layer
// queues fill and stall.
module tb_workload_conv;
  import mubrain_pkg::*;

  localparam int unsigned N2 = 256, N1 = 64;

  logic clk = 0, rst_n = 0, clr = 0;
  core_cfg_t cfg = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  aer_addr_t in_addr = '0, out_addr;
  logic busy, drop;
  logic [2:0] fire, stall;

  mubrain_core dut (
    .clk, .rst_n, .clr, .cfg, .in_valid, .in_ready, .in_addr,
    .out_valid, .out_ready, .out_addr, .busy, .fire, .stall, .drop);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_out = 0, n_stall = 0;
  int w21 [N2][N1];
  int w10 [N1][N_L0];
  int kern [3][3];
  int v1 [N1], v0 [N_L0];
  int exp_q [$];

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic cw(cfg_target_e t, int pre, int post, int data);
    @(negedge clk);
    cfg.we = 1; cfg.dev = '0; cfg.target = t;
    cfg.pre = 14'(pre); cfg.post = 12'(post); cfg.data = vmem_t'(data);
    @(negedge clk) cfg.we = 0;
  endtask

  // integrate-and-fire rule, written here independently of the RTL
  function automatic bit ifn(ref int v, input int w, input int th);
    int s;
    s = v + w;
    if (s > th) begin v = 0; return 1; end
    v = (s < -128) ? -128 : s;
    return 0;
  endfunction

  // sequential model of one input event through l1 and l0
  task automatic model_event(int px);
    for (int j = 0; j < N1; j++)
      if (ifn(v1[j], w21[px][j], 1))
        for (int k = 0; k < N_L0; k++)
          if (ifn(v0[k], w10[j][k], 0)) exp_q.push_back(k);
  endtask

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (stall != '0) n_stall++;
    if (out_valid && out_ready) begin
      n_out++;
      if (exp_q.size() == 0) check(0, "output event expected");
      else begin
        int e;
        e = exp_q.pop_front();
        check(int'(out_addr) == e, "output neuron matches model");
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // shared kernel, weights in -2 .. 1
    foreach (kern[a, b]) kern[a][b] = $urandom_range(0, 3) - 2;
    kern[1][1] = 1;
    for (int p = 0; p < N2; p++) for (int j = 0; j < N1; j++) w21[p][j] = 0;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
      for (int a = -1; a <= 1; a++) for (int b = -1; b <= 1; b++) begin
        int y, x;
        y = 2 * r + a; x = 2 * c + b;
        if (y >= 0 && y < 16 && x >= 0 && x < 16) w21[y * 16 + x][r * 8 + c] = kern[a + 1][b + 1];
      end
    for (int j = 0; j < N1; j++) for (int k = 0; k < N_L0; k++)
      w10[j][k] = ((j / 8) / 2 == k / 4 && (j % 8) / 2 == k % 4) ? 1 : 0;

    cw(CFG_VTH, 0, 2, 0); cw(CFG_VTH, 0, 1, 1); cw(CFG_VTH, 0, 0, 0);
    for (int l = 0; l < 3; l++) cw(CFG_VREST, 0, l, 0);
    for (int p = 0; p < N2; p++) cw(CFG_W_IN, p, 0, 1);
    for (int p = 0; p < N2; p++) for (int j = 0; j < N1; j++) cw(CFG_W_21, p, j, w21[p][j]);
    for (int j = 0; j < N1; j++) for (int k = 0; k < N_L0; k++) cw(CFG_W_10, j, k, w10[j][k]);

    for (int img = 0; img < 3; img++) begin
      // clear neuron states (hardware and model)
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      foreach (v1[j]) v1[j] = 0;
      foreach (v0[k]) v0[k] = 0;
      while (busy) @(negedge clk);
      for (int fr = 0; fr < 3; fr++)
        for (int p = 0; p < N2; p++)
          if ($urandom_range(0, 9) < 3) begin
            model_event(p);
            @(negedge clk);
            in_valid = 1; in_addr = aer_addr_t'(p);
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk);
            @(negedge clk) in_valid = 0;
          end
      while (busy) @(negedge clk);
      repeat (5) @(negedge clk);
      check(exp_q.size() == 0, "every expected output event arrived");
      exp_q.delete();
    end

    $display("output events %0d, stall cycles %0d", n_out, n_stall);
    check(n_out > 0, "the sub-network produced output spikes");
    check(n_stall > 0, "queues filled and layers stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
