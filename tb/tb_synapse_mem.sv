// tb_synapse_mem: writes random weights to random addresses and reads every
// written address back against a shadow copy kept by the testbench; also
// checks that a read in the cycle of a write to the same address returns the
// old weight.
module tb_synapse_mem;
  import mubrain_pkg::*;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  weight_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  weight_t shadow [DEPTH];

  synapse_mem #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every location
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = weight_t'($urandom_range(0, 3));
      shadow[a] = wdata;
    end
    // random rewrites mixed with reads
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we    = $urandom_range(0, 1);
      waddr = AW'($urandom_range(0, DEPTH - 1));
      wdata = weight_t'($urandom_range(0, 3));
      raddr = ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin
        failures++;
        $display("FAIL addr %0d read %0d exp %0d", raddr, rdata, shadow[raddr]);
      end
      if (we) shadow[waddr] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = AW'(a);
      #1;
      checks++;
      if (rdata !== shadow[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
