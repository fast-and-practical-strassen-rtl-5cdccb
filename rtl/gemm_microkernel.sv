// gemm_microkernel: the GeMM micro-kernel that computes one intermediate
// product m = LHS * RHS, an MP x KP by KP x NP multiplication, per call.
//
// It is the Vitis-BLAS-style chain the paper reuses unchanged: the LHS stream
// enters transpose_reuse, the RHS stream enters double_buffer, and the two
// output streams, which follow the same (row tile, column tile, step) order,
// are joined word for word into l1_gemm.  A pair is consumed only when both
// are available.  The result leaves as a stream of SA-element words, one row
// of one SA x SA output tile per word: tiles in the order it = 0..MP/SA-1,
// jt = 0..NP/SA-1, and within a tile rows 0..SA-1.  With both inputs ready the
// array is fed every cycle, so one call takes (MP/SA)*(NP/SA)*KP cycles; the
// ping-pong buffers let the operands of the next call arrive meanwhile.
// Calls are back to back; the caller counts result words to know which
// product they belong to.
module gemm_microkernel #(
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned MP     = 64,
  parameter int unsigned KP     = 64,
  parameter int unsigned NP     = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      lhs_valid,
  output logic                      lhs_ready,
  input  logic [SA-1:0][DATA_W-1:0] lhs_data,
  input  logic                      rhs_valid,
  output logic                      rhs_ready,
  input  logic [SA-1:0][DATA_W-1:0] rhs_data,
  output logic                      m_valid,
  output logic [SA-1:0][DATA_W-1:0] m_data
);
  logic                      ta_valid, ta_ready, ta_first, ta_last;
  logic [SA-1:0][DATA_W-1:0] ta_data;
  logic                      db_valid, db_ready;
  logic [SA-1:0][DATA_W-1:0] db_data;
  logic                      fire;
  logic [$clog2(SA)-1:0]     m_row;

  transpose_reuse #(.SA(SA), .DATA_W(DATA_W), .M(MP), .K(KP), .NT(NP / SA)) u_transpose (
    .clk, .rst_n,
    .in_valid (lhs_valid), .in_ready (lhs_ready), .in_data (lhs_data),
    .out_valid(ta_valid),  .out_ready(ta_ready),  .out_data(ta_data),
    .out_first(ta_first),  .out_last (ta_last)
  );

  double_buffer #(.SA(SA), .DATA_W(DATA_W), .K(KP), .N(NP), .MT(MP / SA)) u_dbuf (
    .clk, .rst_n,
    .in_valid (rhs_valid), .in_ready (rhs_ready), .in_data (rhs_data),
    .out_valid(db_valid),  .out_ready(db_ready),  .out_data(db_data)
  );

  assign fire     = ta_valid && db_valid;
  assign ta_ready = fire;
  assign db_ready = fire;

  l1_gemm #(.SA(SA), .DATA_W(DATA_W), .K(KP)) u_l1 (
    .clk, .rst_n,
    .in_valid(fire), .in_first(ta_first), .in_last(ta_last),
    .a_in(ta_data), .b_in(db_data),
    .out_valid(m_valid), .out_row(m_row), .out_data(m_data)
  );
endmodule
