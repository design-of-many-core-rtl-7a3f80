// tb_mubrain_layer: a fully connected 8 -> 4 layer and a one-to-one 8-neuron
// input layer, each run against an integer reference model kept here.
// Random weights, thresholds and events are applied; every output spike is
// compared, in order, with the model's. The output side is randomly not
// ready so that the 2-entry spike queue fills and the walk stalls. Timing
// checks: the clear sweep after reset lasts N_POST cycles, and back-to-back
// events are accepted every N_POST cycles (every cycle for one-to-one).
module tb_mubrain_layer;
  import mubrain_pkg::*;
  localparam int unsigned NPRE = 8, NPOST = 4;

  logic clk = 0, rst_n = 0, clr = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  // ---------------- fully connected layer ----------------
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, w_we = 0;
  logic [2:0] in_idx = '0, w_pre = '0;
  logic [1:0] out_idx, w_post = '0;
  weight_t w_data = '0;
  vmem_t vth = 8'sd1, vrest = 8'sd0;
  logic busy, fire_o, stall_o;

  mubrain_layer #(.N_PRE(NPRE), .N_POST(NPOST), .ONE_TO_ONE(1'b0), .FIFO_DEPTH(2)) dut (
    .clk, .rst_n, .clr, .in_valid, .in_ready, .in_idx, .out_valid, .out_ready, .out_idx,
    .w_we, .w_pre, .w_post, .w_data, .vth, .vrest, .busy, .fire_o, .stall_o);

  // ---------------- one-to-one layer ---------------------
  logic in_valid1 = 0, in_ready1, out_valid1, out_ready1 = 1, w_we1 = 0;
  logic [2:0] in_idx1 = '0, w_pre1 = '0, out_idx1;
  weight_t w_data1 = '0;
  logic busy1, fire1, stall1;

  mubrain_layer #(.N_PRE(NPRE), .N_POST(NPRE), .ONE_TO_ONE(1'b1), .FIFO_DEPTH(2)) dut1 (
    .clk, .rst_n, .clr, .in_valid(in_valid1), .in_ready(in_ready1), .in_idx(in_idx1),
    .out_valid(out_valid1), .out_ready(out_ready1), .out_idx(out_idx1),
    .w_we(w_we1), .w_pre(w_pre1), .w_post(3'd0), .w_data(w_data1), .vth, .vrest,
    .busy(busy1), .fire_o(fire1), .stall_o(stall1));

  // ---------------- reference models ---------------------
  int W [NPRE][NPOST];
  int W1 [NPRE];
  int V [NPOST];
  int V1 [NPRE];
  int exp_q[$], exp_q1[$];
  int stalls = 0, fires = 0;

  function automatic void model_update(ref int v, input int w, input int th, input int vr, output bit spk);
    int s = v + w;
    spk = (s > th);
    v = spk ? vr : (s < -128 ? -128 : s);
  endfunction

  always @(posedge clk) if (rst_n) begin
    bit spk;
    if (in_valid && in_ready) begin
      for (int j = 0; j < NPOST; j++) begin
        model_update(V[j], W[in_idx][j], int'(vth), int'(vrest), spk);
        if (spk) exp_q.push_back(j);
      end
    end
    if (in_valid1 && in_ready1) begin
      model_update(V1[in_idx1], W1[in_idx1], int'(vth), int'(vrest), spk);
      if (spk) exp_q1.push_back(int'(in_idx1));
    end
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && exp_q[0] == int'(out_idx), "layer spike order");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (out_valid1 && out_ready1) begin
      check(exp_q1.size() > 0 && exp_q1[0] == int'(out_idx1), "one-to-one spike order");
      if (exp_q1.size() > 0) void'(exp_q1.pop_front());
    end
    if (stall_o || stall1) stalls++;
    if (fire_o || fire1) fires++;
  end

  initial begin
    int t0, n_clear, t_first, t_last;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // clear sweep length
    n_clear = 0;
    while (!in_ready) begin @(negedge clk); n_clear++; end
    check(n_clear == NPOST, "clear sweep lasts N_POST cycles");
    for (int j = 0; j < NPOST; j++) V[j] = 0;
    for (int j = 0; j < NPRE; j++) V1[j] = 0;

    // program weights
    for (int i = 0; i < NPRE; i++) begin
      for (int j = 0; j < NPOST; j++) begin
        @(negedge clk);
        w_we = 1; w_pre = 3'(i); w_post = 2'(j);
        W[i][j] = int'($urandom_range(0, 3)) - 2;
        if (W[i][j] < 0 && $urandom_range(0, 2) != 0) W[i][j] = -W[i][j] - 1; // bias positive
        w_data = weight_t'(W[i][j]);
      end
      @(negedge clk);
      w_we = 0;
      w_we1 = 1; w_pre1 = 3'(i); W1[i] = int'($urandom_range(0, 1)); w_data1 = weight_t'(W1[i]);
    end
    @(negedge clk) begin w_we = 0; w_we1 = 0; end

    // random traffic with a randomly stalling output
    fork
      begin
        for (int k = 0; k < 300; k++) begin
          @(negedge clk);
          in_valid = 1; in_idx = 3'($urandom_range(0, NPRE - 1));
          @(posedge clk); while (!in_ready) @(posedge clk);
          @(negedge clk) in_valid = 0;
        end
      end
      begin
        for (int k = 0; k < 300; k++) begin
          @(negedge clk);
          in_valid1 = 1; in_idx1 = 3'($urandom_range(0, NPRE - 1));
          @(posedge clk); while (!in_ready1) @(posedge clk);
          @(negedge clk) in_valid1 = 0;
        end
      end
      begin
        for (int k = 0; k < 4000; k++) begin
          @(negedge clk);
          out_ready  = ($urandom_range(0, 3) == 0);
          out_ready1 = ($urandom_range(0, 3) == 0);
        end
      end
    join_any
    @(negedge clk) begin out_ready = 1; out_ready1 = 1; end
    while (busy || busy1 || in_valid || in_valid1) @(negedge clk);
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0 && exp_q1.size() == 0, "all expected spikes seen");
    check(stalls > 0, "stall happened");
    check(fires > 0, "spikes happened");

    // throughput: back-to-back events, high threshold so nothing fires
    vth = 8'sd127;
    @(negedge clk);
    in_valid = 1; in_idx = 3'd1;
    t_first = -1; t_last = -1; t0 = 0;
    for (int n = 0; n < 10; ) begin
      @(posedge clk);
      if (in_ready) begin
        if (t_first < 0) t_first = t0;
        t_last = t0; n++;
      end
      t0++;
    end
    @(negedge clk) in_valid = 0;
    check(t_last - t_first == 9 * NPOST, "one event per N_POST cycles");
    // one-to-one layer: one event per cycle
    @(negedge clk) in_valid1 = 1;
    t0 = 0;
    for (int n = 0; n < 10; n++) begin
      @(posedge clk);
      if (in_ready1) t0++;
    end
    @(negedge clk) in_valid1 = 0;
    check(t0 == 10, "one-to-one: one event per cycle");
    repeat (NPOST + 2) @(negedge clk);

    // clr returns every neuron to Vrest: one event after clear must match model
    vth = 8'sd1; vrest = 8'sd0;
    clr = 1; @(negedge clk) clr = 0;
    for (int j = 0; j < NPOST; j++) V[j] = 0;
    for (int j = 0; j < NPRE; j++) V1[j] = 0;
    while (!in_ready) @(negedge clk);
    for (int k = 0; k < 20; k++) begin
      in_valid = 1; in_idx = 3'(k % NPRE);
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "after clr, spikes match model");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
