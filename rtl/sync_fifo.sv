// sync_fifo: the FIFO streams that connect the tasks of the kernel's dataflow
// region (the "pipes" between Compute LHS/RHS and the micro-kernel).
//
// A single-clock first-in first-out queue with a valid/ready handshake on both
// sides.  A word is written when in_valid && in_ready and read when
// out_valid && out_ready; both may happen in the same cycle.  Storage is a
// circular array of DEPTH entries with read and write pointers.  almost_full
// rises when at most AF_MARGIN free entries remain, so that a producer with
// a few words already in flight can stop issuing in time.  Read data is the
// head entry (no extra latency).  The paper does not give FIFO depths; DEPTH is
// this design's choice.  Reset empties the queue.
module sync_fifo #(
  parameter int unsigned W         = 32,
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned AF_MARGIN = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         almost_full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wptr, rptr;
  logic          push, pop;

  assign in_ready    = (count < DEPTH);
  assign out_valid   = (count != 0);
  assign out_data    = mem[rptr];
  assign push        = in_valid && in_ready;
  assign pop         = out_valid && out_ready;
  assign almost_full = (count + AF_MARGIN >= DEPTH);

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  // A word must not be pushed into a full queue nor popped from an empty one.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> count < DEPTH);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);
endmodule
