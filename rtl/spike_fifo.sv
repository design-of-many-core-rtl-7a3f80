// spike_fifo: small first-in first-out queue of spike addresses.
//
// Queues the indices of neurons that fired until the next stage (the next
// layer, or the bus) takes them. Valid/ready on both sides; a push and a pop
// may happen in the same cycle, also when full (the pop frees the slot).
// DEPTH must be a power of two. The queue itself is this design's own choice:
// the original clock-less core hands each spike on by handshake.
module spike_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] buf_q [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      count_q;

  logic push, pop;

  assign out_valid = (count_q != '0);
  assign in_ready  = (count_q != (PW+1)'(DEPTH)) || out_ready;
  assign out_data  = buf_q[rd_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q    <= '0;
      wr_q    <= '0;
      count_q <= '0;
    end else begin
      if (push) wr_q <= wr_q + 1'b1;
      if (pop)  rd_q <= rd_q + 1'b1;
      count_q <= count_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) buf_q[wr_q] <= in_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) count_q <= (PW+1)'(DEPTH));

endmodule
