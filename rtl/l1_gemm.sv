// l1_gemm: the L1 GeMM core of the micro-kernel (Fig. 1 of the paper): a
// triangular shift-register skew stage, row-major window shift registers and
// an SA x SA systolic array of multiply-accumulate PEs.
//
// Each accepted input cycle carries step p of one output tile: a_in is column
// p of the LHS for the tile's SA rows (a row of A transposed) and b_in is row
// p of the RHS for the tile's SA columns; first/last mark p = 0 and p = K-1.
// The triangular SRL delays lane i by i cycles.  The window registers then
// shift the A lanes right along the rows and the B lanes down along the
// columns, one position per cycle, so PE(i,j) sees a[i][p] and b[p][j] together,
// i + j + 1 cycles after they entered.  The valid/first/last flags travel
// down a matching delay line so each PE knows when to clear and when to
// deliver.  Every PE thus computes c[i][j] = sum_p a[i][p]*b[p][j].
//
// When the last PE (SA-1, SA-1) has delivered, the SA x SA results are copied
// into an output register bank and sent out one row per cycle over SA cycles
// (out_valid, out_data = row out_row of the tile).  The output has no ready:
// the consumer (the C buffer) takes one word per cycle.  The array accepts one
// input per cycle without stalls, so a tile takes K cycles in steady state;
// K must exceed 2*(SA-1) so that a tile's results are copied out before the
// next tile overwrites them.  The input handshake is in_valid only; gaps are
// allowed.  Shift-register structure follows Fig. 1; the output drain is this
// design's choice.
module l1_gemm #(
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned K      = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [SA-1:0][DATA_W-1:0] a_in,
  input  logic [SA-1:0][DATA_W-1:0] b_in,
  output logic                      out_valid,
  output logic [$clog2(SA)-1:0]     out_row,
  output logic [SA-1:0][DATA_W-1:0] out_data
);
  typedef struct packed { logic valid; logic first; logic last; } ctl_t;
  localparam int unsigned ND = 2 * SA;   // flag delay line length

  // triangular SRL: lane i delayed by i cycles
  logic [DATA_W-1:0] srl_a [SA][SA];
  logic [DATA_W-1:0] srl_b [SA][SA];
  logic [SA-1:0][DATA_W-1:0] skew_a, skew_b;

  always_ff @(posedge clk) begin
    for (int i = 0; i < SA; i++) begin
      srl_a[i][0] <= a_in[i];
      srl_b[i][0] <= b_in[i];
      for (int d = 1; d < SA; d++) begin
        srl_a[i][d] <= srl_a[i][d-1];
        srl_b[i][d] <= srl_b[i][d-1];
      end
    end
  end
  always_comb begin
    skew_a[0] = a_in[0];
    skew_b[0] = b_in[0];
    for (int i = 1; i < SA; i++) begin
      skew_a[i] = srl_a[i][i-1];
      skew_b[i] = srl_b[i][i-1];
    end
  end

  // row-major window shift registers
  logic [DATA_W-1:0] win_a [SA][SA];
  logic [DATA_W-1:0] win_b [SA][SA];
  always_ff @(posedge clk) begin
    for (int i = 0; i < SA; i++) begin
      win_a[i][0] <= skew_a[i];
      win_b[0][i] <= skew_b[i];
      for (int j = 1; j < SA; j++) begin
        win_a[i][j] <= win_a[i][j-1];   // A shifts right along its row
        win_b[j][i] <= win_b[j-1][i];   // B shifts down along its column
      end
    end
  end

  // control delay line: ctl_d[d] holds the input flags of d+1 cycles ago
  ctl_t ctl_d [ND];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < ND; d++) ctl_d[d] <= '0;
    end else begin
      ctl_d[0] <= '{valid: in_valid, first: in_first, last: in_last};
      for (int d = 1; d < ND; d++) ctl_d[d] <= ctl_d[d-1];
    end
  end

  // systolic array
  logic [DATA_W-1:0] res [SA][SA];
  for (genvar i = 0; i < SA; i++) begin : g_row
    for (genvar j = 0; j < SA; j++) begin : g_col
      systolic_pe #(.DATA_W(DATA_W)) u_pe (
        .clk   (clk),
        .valid (ctl_d[i+j].valid),
        .first (ctl_d[i+j].first),
        .last  (ctl_d[i+j].last),
        .a     (win_a[i][j]),
        .b     (win_b[i][j]),
        .res   (res[i][j])
      );
    end
  end

  // output drain
  logic [DATA_W-1:0]        obuf [SA][SA];
  logic                     draining;
  logic [$clog2(SA)-1:0]    drow;
  logic                     copy;
  assign copy = ctl_d[ND-1].valid && ctl_d[ND-1].last;

  always_ff @(posedge clk) begin
    if (copy) obuf <= res;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining <= 1'b0;
      drow     <= '0;
    end else if (copy) begin
      draining <= 1'b1;
      drow     <= '0;
    end else if (draining) begin
      if (drow == $clog2(SA)'(SA - 1)) draining <= 1'b0;
      drow <= drow + 1'b1;
    end
  end

  assign out_valid = draining;
  assign out_row   = drow;
  always_comb begin
    for (int j = 0; j < SA; j++) out_data[j] = obuf[drow][j];
  end

  initial assert (K > 2 * (SA - 1)) else $error("l1_gemm: K must exceed 2*(SA-1)");
  a_no_copy_while_draining: assert property (@(posedge clk) disable iff (!rst_n)
    copy |-> !draining || drow == $clog2(SA)'(SA - 1));
endmodule
