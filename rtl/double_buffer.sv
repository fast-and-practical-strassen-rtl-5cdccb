// double_buffer: the micro-kernel's "Double Buffer" stage for the RHS operand
// (a K x N submatrix that arrives row by row, SA elements per word).
//
// The systolic array needs, for output columns jt*SA .. jt*SA+SA-1, one row
// segment of the RHS per step p = 0..K-1.  The stored submatrix is streamed
// MT times, once per row tile of the output, in the order it, jt, p, which is
// the same order in which transpose_reuse streams the LHS, so the two streams
// pair up word for word.  Streaming it MT times is the reuse the double buffer
// provides in Fig. 2.  Two halves alternate: one is filled while the other is
// read.  Both ports use valid/ready; reads are combinational.
module double_buffer #(
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned K      = 64,
  parameter int unsigned N      = 64,
  parameter int unsigned MT     = 4,     // reuse count: row tiles of the output
  localparam int unsigned NW    = N / SA,
  localparam int unsigned DEPTH = K * NW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [SA-1:0][DATA_W-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [SA-1:0][DATA_W-1:0] out_data
);
  typedef logic [SA-1:0][DATA_W-1:0] word_t;
  localparam int unsigned AW = $clog2(DEPTH);

  word_t mem [2][DEPTH];
  logic [1:0] full;
  logic       wsel, rsel;

  logic [AW-1:0] wr_addr;
  logic          push;
  assign in_ready = !full[wsel];
  assign push     = in_valid && in_ready;

  logic [$clog2(MT+1)-1:0] it;
  logic [$clog2(NW+1)-1:0] jt;
  logic [$clog2(K)-1:0]    p;
  logic                    pop, rd_end;
  assign out_valid = full[rsel];
  assign pop       = out_valid && out_ready;
  assign rd_end    = (p == K - 1) && (jt == NW - 1) && (it == MT - 1);
  assign out_data  = mem[rsel][AW'(p * NW + jt)];

  always_ff @(posedge clk) begin
    if (push) mem[wsel][wr_addr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0; wr_addr <= '0;
      it <= '0; jt <= '0; p <= '0;
    end else begin
      if (push) begin
        if (wr_addr == AW'(DEPTH - 1)) begin
          wr_addr    <= '0;
          full[wsel] <= 1'b1;
          wsel       <= !wsel;
        end else begin
          wr_addr <= wr_addr + 1'b1;
        end
      end
      if (pop) begin
        if (p == K - 1) begin
          p <= '0;
          if (jt == NW - 1) begin
            jt <= '0;
            if (it == MT - 1) it <= '0;
            else              it <= it + 1'b1;
          end else begin
            jt <= jt + 1'b1;
          end
        end else begin
          p <= p + 1'b1;
        end
        if (rd_end) begin
          full[rsel] <= 1'b0;
          rsel       <= !rsel;
        end
      end
    end
  end
endmodule
