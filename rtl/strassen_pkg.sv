// strassen_pkg: shared constants, types and the Strassen-squared instruction table.
//
// Strassen's one-level algorithm for 2x2 block matrices forms seven products
//   m0 = (A00+A11)(B00+B11)  m1 = (A10+A11)B00      m2 = A00(B01-B11)
//   m3 = A11(B10-B00)        m4 = (A00+A01)B11      m5 = (A10-A00)(B00+B01)
//   m6 = (A01-A11)(B10+B11)
// and combines them as C00 = m0+m3-m4+m6, C01 = m2+m4, C10 = m1+m3,
// C11 = m0-m1+m2+m5.  Applying it to itself on a 4x4 block matrix (outer 2x2
// of inner 2x2 blocks) gives the two-level ("Strassen squared") algorithm with
// 7*7 = 49 products.  Product t = 7*p + q uses outer product p and inner product q;
// the coefficient of block A[r][c] (r = 2I+i, c = 2J+j) in its left operand is
// outer_lhs[p][I][J] * inner_lhs[q][i][j], likewise for B and for the output
// blocks C.  The paper lists part of this algorithm with its own numbering of
// the 49 products; this package uses the t = 7p+q numbering instead.
//
// Blocks of a 4x4 block matrix are indexed b = 4*row + col (0..15).  A coefficient
// is a 2-bit two's complement value in {-1, 0, +1}.  The functions below are pure
// combinational logic of the product index and the block index, so they can be
// used as a 49-entry ROM in the RTL and as a reference in testbenches.
package strassen_pkg;

  localparam int unsigned NPROD  = 49;  // products per 4x4 block multiplication
  localparam int unsigned NBLK   = 16;  // submatrices in a 4x4 block matrix
  localparam int unsigned MAXOPS = 4;   // most operands in one LHS or RHS

  typedef logic signed [1:0] coef_t;      // -1, 0, +1
  typedef logic [5:0]        prod_idx_t;  // 0..48
  typedef logic [3:0]        blk_idx_t;   // 0..15

  // Coefficients of the one-level algorithm (Fig. 3(b)), index [q][2*row+col].
  function automatic coef_t l1_lhs(input int q, input int b);
    coef_t c [4];
    case (q)
      0: c = '{2'sd1, 2'sd0, 2'sd0, 2'sd1};
      1: c = '{2'sd0, 2'sd0, 2'sd1, 2'sd1};
      2: c = '{2'sd1, 2'sd0, 2'sd0, 2'sd0};
      3: c = '{2'sd0, 2'sd0, 2'sd0, 2'sd1};
      4: c = '{2'sd1, 2'sd1, 2'sd0, 2'sd0};
      5: c = '{-2'sd1, 2'sd0, 2'sd1, 2'sd0};
      default: c = '{2'sd0, 2'sd1, 2'sd0, -2'sd1};
    endcase
    return c[b];
  endfunction

  function automatic coef_t l1_rhs(input int q, input int b);
    coef_t c [4];
    case (q)
      0: c = '{2'sd1, 2'sd0, 2'sd0, 2'sd1};
      1: c = '{2'sd1, 2'sd0, 2'sd0, 2'sd0};
      2: c = '{2'sd0, 2'sd1, 2'sd0, -2'sd1};
      3: c = '{-2'sd1, 2'sd0, 2'sd1, 2'sd0};
      4: c = '{2'sd0, 2'sd0, 2'sd0, 2'sd1};
      5: c = '{2'sd1, 2'sd1, 2'sd0, 2'sd0};
      default: c = '{2'sd0, 2'sd0, 2'sd1, 2'sd1};
    endcase
    return c[b];
  endfunction

  // Coefficient of product q in output block b of the one-level algorithm.
  function automatic coef_t l1_out(input int q, input int b);
    coef_t c [4];
    case (q)
      0: c = '{2'sd1, 2'sd0, 2'sd0, 2'sd1};
      1: c = '{2'sd0, 2'sd0, 2'sd1, -2'sd1};
      2: c = '{2'sd0, 2'sd1, 2'sd0, 2'sd1};
      3: c = '{2'sd1, 2'sd0, 2'sd1, 2'sd0};
      4: c = '{-2'sd1, 2'sd1, 2'sd0, 2'sd0};
      5: c = '{2'sd0, 2'sd0, 2'sd0, 2'sd1};
      default: c = '{2'sd1, 2'sd0, 2'sd0, 2'sd0};
    endcase
    return c[b];
  endfunction

  // Split a 4x4 block index into outer and inner 2x2 indices.
  function automatic int outer_of(input int b);
    return 2 * ((b / 4) / 2) + ((b % 4) / 2);
  endfunction
  function automatic int inner_of(input int b);
    return 2 * ((b / 4) % 2) + ((b % 4) % 2);
  endfunction

  function automatic coef_t mul_coef(input coef_t x, input coef_t y);
    return coef_t'(x * y);
  endfunction

  // Two-level coefficients of product t for block b.
  function automatic coef_t s2_lhs(input int t, input int b);
    return mul_coef(l1_lhs(t / 7, outer_of(b)), l1_lhs(t % 7, inner_of(b)));
  endfunction
  function automatic coef_t s2_rhs(input int t, input int b);
    return mul_coef(l1_rhs(t / 7, outer_of(b)), l1_rhs(t % 7, inner_of(b)));
  endfunction
  function automatic coef_t s2_out(input int t, input int b);
    return mul_coef(l1_out(t / 7, outer_of(b)), l1_out(t % 7, inner_of(b)));
  endfunction

  // Operand list of one side of a product: up to four (block, sign) pairs,
  // packed in block order, and how many of them there are (1, 2 or 4).
  typedef struct packed {
    logic [2:0]                   nops;
    blk_idx_t [MAXOPS-1:0]        idx;
    logic     [MAXOPS-1:0]        neg;
  } oplist_t;

  function automatic oplist_t s2_oplist(input int t, input bit rhs_side);
    oplist_t o;
    int n;
    coef_t c;
    o = '0;
    n = 0;
    for (int b = 0; b < NBLK; b++) begin
      c = rhs_side ? s2_rhs(t, b) : s2_lhs(t, b);
      if (c != 0 && n < MAXOPS) begin
        o.idx[n] = blk_idx_t'(b);
        o.neg[n] = (c < 0);
        n++;
      end
    end
    o.nops = 3'(n);
    return o;
  endfunction

endpackage
