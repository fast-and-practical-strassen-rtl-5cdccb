// transpose_reuse: the micro-kernel's "Transpose, Reuse" stage for the LHS
// operand (an M x K submatrix that arrives row by row).
//
// The systolic array needs, for output rows it*SA .. it*SA+SA-1, one column of
// the LHS per step p = 0..K-1, i.e. a row of its transpose.  Incoming words
// (SA consecutive elements of one row) are stored in SA banks, bank = row mod
// SA, so that the SA rows of a tile sit side by side and a column can be read
// in one cycle.  The stored submatrix is streamed out NT times per row tile,
// once for each column tile of the output (the reuse of Fig. 2, which avoids
// fetching it again), in the order it, jt, p.  out_first/out_last mark p = 0
// and p = K-1, where the PEs clear and deliver their sums.
//
// Storage is ping-pong: the next submatrix is written into one half while the
// other half is read, so the LHS of product t+1 is taken in while product t is
// computed.  Both ports use valid/ready; reads are combinational from the
// array.  Banking and ping-pong depth are this design's choices; the paper only
// names the stage.
module transpose_reuse #(
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned M      = 64,
  parameter int unsigned K      = 64,
  parameter int unsigned NT     = 4,     // reuse count: column tiles of the output
  localparam int unsigned KW    = K / SA,
  localparam int unsigned DEPTH = (M / SA) * KW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [SA-1:0][DATA_W-1:0] in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [SA-1:0][DATA_W-1:0] out_data,
  output logic                      out_first,
  output logic                      out_last
);
  typedef logic [SA-1:0][DATA_W-1:0] word_t;
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t mem [2][SA][DEPTH];
  logic [1:0] full;
  logic       wsel, rsel;

  // write side
  logic [$clog2(M)-1:0]  wr_row;
  logic [$clog2(KW+1)-1:0] wr_w;
  logic                  push;
  assign in_ready = !full[wsel];
  assign push     = in_valid && in_ready;

  // read side
  logic [$clog2(M/SA+1)-1:0] it;
  logic [$clog2(NT+1)-1:0]   jt;
  logic [$clog2(K)-1:0]      p;
  logic                      pop, rd_end;
  assign out_valid = full[rsel];
  assign pop       = out_valid && out_ready;
  assign out_first = (p == 0);
  assign out_last  = (p == K - 1);
  assign rd_end    = (p == K - 1) && (jt == NT - 1) && (it == M / SA - 1);

  logic [AW-1:0] rd_addr;
  assign rd_addr = AW'(it * KW + p / SA);
  always_comb begin
    for (int r = 0; r < SA; r++) out_data[r] = mem[rsel][r][rd_addr][p % SA];
  end

  always_ff @(posedge clk) begin
    if (push) mem[wsel][wr_row % SA][AW'((wr_row / SA) * KW + wr_w)] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0;
      wr_row <= '0; wr_w <= '0;
      it <= '0; jt <= '0; p <= '0;
    end else begin
      if (push) begin
        if (wr_w == KW - 1) begin
          wr_w <= '0;
          if (wr_row == M - 1) begin
            wr_row     <= '0;
            full[wsel] <= 1'b1;
            wsel       <= !wsel;
          end else begin
            wr_row <= wr_row + 1'b1;
          end
        end else begin
          wr_w <= wr_w + 1'b1;
        end
      end
      if (pop) begin
        if (p == K - 1) begin
          p <= '0;
          if (jt == NT - 1) begin
            jt <= '0;
            if (it == M / SA - 1) it <= '0;
            else                  it <= it + 1'b1;
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
