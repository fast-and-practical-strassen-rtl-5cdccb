// operand_sum: adds NOPS submatrix words with individual signs,
//   sum[e] = sum over i of (neg[i] ? -ops[i][e] : +ops[i][e])   (mod 2^DATA_W),
// for each of the SA elements of a word.
//
// Every LHS and RHS of the two-level Strassen algorithm has four, two or one
// operand, so the kernel instantiates this module with NOPS = 4, 2 and 1, as
// the paper's three operand modules.  Arithmetic wraps at DATA_W bits like the
// kernel's integer data types (the paper is silent on overflow).  Purely
// combinational; the caller registers the result.
module operand_sum #(
  parameter int unsigned NOPS   = 4,
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16
) (
  input  logic [NOPS-1:0][SA-1:0][DATA_W-1:0] ops,
  input  logic [NOPS-1:0]                     neg,
  output logic [SA-1:0][DATA_W-1:0]           sum
);
  always_comb begin
    for (int e = 0; e < SA; e++) begin
      sum[e] = '0;
      for (int i = 0; i < NOPS; i++)
        sum[e] = neg[i] ? sum[e] - ops[i][e] : sum[e] + ops[i][e];
    end
  end
endmodule
