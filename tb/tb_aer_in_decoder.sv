// tb_aer_in_decoder: addresses inside and beyond a 200-neuron core, with the
// l2 side ready and not ready; in-range events must pass with their index and
// the l2 ready, out-of-range events must be consumed and flagged. The
// addresses next to the core's edge are swept on purpose.
module tb_aer_in_decoder;
  import mubrain_pkg::*;
  localparam int unsigned N = 200;

  logic aer_valid, aer_ready, l2_valid, l2_ready, drop;
  aer_addr_t aer_addr;
  logic [7:0] l2_idx;
  int checks = 0, failures = 0, drops = 0;

  aer_in_decoder #(.N_L2(N)) dut (.aer_valid, .aer_ready, .aer_addr,
                                  .l2_valid, .l2_ready, .l2_idx, .drop);

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s addr=%0d", what, aer_addr);
    end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      aer_valid = $urandom_range(0, 1);
      l2_ready  = $urandom_range(0, 1);
      // every 8th address sits at the edge of the core (N-2 .. N+1)
      if (i % 8 == 7)      aer_addr = aer_addr_t'(N - 2 + (i / 8) % 4);
      else if (i % 4 == 0) aer_addr = aer_addr_t'($urandom_range(N, 16383));
      else                 aer_addr = aer_addr_t'($urandom_range(0, N - 1));
      #1;
      if (aer_addr < N) begin
        check(l2_valid == aer_valid, "valid passes");
        check(aer_ready == l2_ready, "ready passes");
        check(int'(l2_idx) == int'(aer_addr), "index");
        check(!drop, "no drop");
      end else begin
        check(!l2_valid, "blocked");
        check(aer_ready, "consumed");
        check(drop == aer_valid, "drop flag");
        if (drop) drops++;
      end
    end
    check(drops > 0, "drops seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
