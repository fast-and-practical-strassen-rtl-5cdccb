// cycle_counter: the hardware clock-cycle counter that runs beside the kernel
// and measures its execution time, t = cycles / f_clk.
//
// A start pulse clears the count and begins counting; every following clock
// cycle up to and including the one in which stop is seen adds one.  The
// count then holds until the next start.  running shows that it counts.  The
// 64-bit width is this design's choice.
module cycle_counter #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         stop,
  output logic         running,
  output logic [W-1:0] cycles
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cycles  <= '0;
    end else if (start) begin
      running <= 1'b1;
      cycles  <= '0;
    end else if (running) begin
      cycles <= cycles + 1'b1;
      if (stop) running <= 1'b0;
    end
  end
endmodule
