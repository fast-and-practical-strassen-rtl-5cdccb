// systolic_pe: one processing element of the L1 GeMM systolic array: a
// multiplier, an accumulator and a result register.
//
// On a cycle with valid set it adds a*b to its accumulator, starting from zero
// when first is set (step p = 0 of a tile).  When last is set (p = K-1) the
// completed sum, including this cycle's product, is also copied into res, where
// it stays until the next tile's last step, so the array can start the next
// tile at once.  Arithmetic wraps at DATA_W bits.
module systolic_pe #(
  parameter int unsigned DATA_W = 16
) (
  input  logic              clk,
  input  logic              valid,
  input  logic              first,
  input  logic              last,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic [DATA_W-1:0] res
);
  logic [DATA_W-1:0] acc, sum;
  assign sum = (first ? '0 : acc) + DATA_W'(a * b);
  always_ff @(posedge clk) begin
    if (valid) acc <= sum;
    if (valid && last) res <= sum;
  end
endmodule
