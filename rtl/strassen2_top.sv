// strassen2_top: the Strassen-squared GeMM kernel.
//
// It multiplies C = A*B by walking the matrices in blocks of 4x4 submatrices
// (submatrices of MP x KP for A, KP x NP for B, MP x NP for C) and multiplying
// each pair of blocks with the two-level Strassen algorithm: 49 submatrix
// products instead of the 64 of the standard block algorithm.  The dataflow:
//
//   A memory port -> read_buffer A (16 banks) -> operand_transform (LHS) -> FIFO -\
//                                                                                  gemm_microkernel -> strassen_c_buffer -> C memory port
//   B memory port -> read_buffer B (16 banks) -> operand_transform (RHS) -> FIFO -/
//
// outer_loop_ctrl runs the loops over C block rows, C block columns and
// k-blocks and starts the loads, the 49-product computation and the
// write-back; cycle_counter measures the run.  Inside one block
// multiplication the operand computation, the micro-kernel and the
// accumulation overlap as a pipeline; the micro-kernel is the bottleneck at
// (MP/SA)*(NP/SA)*KP cycles per product.
//
// Interface: a start pulse with dim_m, dim_k, dim_n (multiples of 4*MP, 4*KP,
// 4*NP) and word base addresses of A, B and C; done pulses at the end and
// cycles then holds the run time in clock cycles.  Each matrix has its own
// memory port: two burst-read ports (request valid/ready with address and
// length in words; in-order responses, one word per cycle, always accepted)
// and one burst-write port (request, then data, both valid/ready).  A memory
// word carries SA elements of DATA_W bits; arithmetic wraps at DATA_W bits.
module strassen2_top #(
  parameter int unsigned SA         = 16,
  parameter int unsigned DATA_W     = 16,
  parameter int unsigned MP         = 64,
  parameter int unsigned KP         = 64,
  parameter int unsigned NP         = 64,
  parameter int unsigned AW         = 32,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [15:0]               dim_m,
  input  logic [15:0]               dim_k,
  input  logic [15:0]               dim_n,
  input  logic [AW-1:0]             a_base,
  input  logic [AW-1:0]             b_base,
  input  logic [AW-1:0]             c_base,
  output logic                      busy,
  output logic                      done,
  output logic [63:0]               cycles,
  // A read port
  output logic                      a_rd_req_valid,
  input  logic                      a_rd_req_ready,
  output logic [AW-1:0]             a_rd_req_addr,
  output logic [15:0]               a_rd_req_len,
  input  logic                      a_rd_resp_valid,
  input  logic [SA-1:0][DATA_W-1:0] a_rd_resp_data,
  // B read port
  output logic                      b_rd_req_valid,
  input  logic                      b_rd_req_ready,
  output logic [AW-1:0]             b_rd_req_addr,
  output logic [15:0]               b_rd_req_len,
  input  logic                      b_rd_resp_valid,
  input  logic [SA-1:0][DATA_W-1:0] b_rd_resp_data,
  // C write port
  output logic                      c_wr_req_valid,
  input  logic                      c_wr_req_ready,
  output logic [AW-1:0]             c_wr_req_addr,
  output logic [15:0]               c_wr_req_len,
  output logic                      c_wr_data_valid,
  input  logic                      c_wr_data_ready,
  output logic [SA-1:0][DATA_W-1:0] c_wr_data
);
  typedef logic [SA-1:0][DATA_W-1:0] word_t;
  localparam int unsigned AWORDS = MP * KP / SA;
  localparam int unsigned BWORDS = KP * NP / SA;

  // controller
  logic          ld_start, ld_a_done, ld_b_done, cmp_start, acc_done;
  logic          c_ready, wb_start, wb_done, wb_busy;
  logic [AW-1:0] ld_a_addr, ld_a_stride, ld_b_addr, ld_b_stride, wb_addr, wb_stride;

  outer_loop_ctrl #(.SA(SA), .MP(MP), .KP(KP), .NP(NP), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .dim_m, .dim_k, .dim_n, .a_base, .b_base, .c_base,
    .busy, .done,
    .ld_start, .ld_a_addr, .ld_a_stride, .ld_b_addr, .ld_b_stride, .ld_a_done, .ld_b_done,
    .cmp_start, .acc_done, .c_ready, .wb_start, .wb_addr, .wb_stride, .wb_done
  );

  logic counting;
  cycle_counter #(.W(64)) u_cycles (
    .clk, .rst_n, .start(start && !busy), .stop(done), .running(counting), .cycles
  );

  // read/buffer A and B
  logic [$clog2(AWORDS)-1:0] a_buf_addr;
  logic [$clog2(BWORDS)-1:0] b_buf_addr;
  word_t [15:0]              a_buf_data, b_buf_data;
  logic                      a_ld_busy, b_ld_busy;

  read_buffer #(.SA(SA), .DATA_W(DATA_W), .SUB_R(MP), .SUB_C(KP), .AW(AW)) u_buf_a (
    .clk, .rst_n, .start(ld_start), .base_addr(ld_a_addr), .stride(ld_a_stride),
    .busy(a_ld_busy), .done(ld_a_done),
    .rd_req_valid(a_rd_req_valid), .rd_req_ready(a_rd_req_ready),
    .rd_req_addr(a_rd_req_addr), .rd_req_len(a_rd_req_len),
    .rd_resp_valid(a_rd_resp_valid), .rd_resp_data(a_rd_resp_data),
    .buf_addr(a_buf_addr), .buf_data(a_buf_data)
  );

  read_buffer #(.SA(SA), .DATA_W(DATA_W), .SUB_R(KP), .SUB_C(NP), .AW(AW)) u_buf_b (
    .clk, .rst_n, .start(ld_start), .base_addr(ld_b_addr), .stride(ld_b_stride),
    .busy(b_ld_busy), .done(ld_b_done),
    .rd_req_valid(b_rd_req_valid), .rd_req_ready(b_rd_req_ready),
    .rd_req_addr(b_rd_req_addr), .rd_req_len(b_rd_req_len),
    .rd_resp_valid(b_rd_resp_valid), .rd_resp_data(b_rd_resp_data),
    .buf_addr(b_buf_addr), .buf_data(b_buf_data)
  );

  // compute LHS / RHS
  logic  lhs_t_valid, rhs_t_valid, lhs_afull, rhs_afull;
  logic  lhs_t_busy, rhs_t_busy, lhs_t_done, rhs_t_done;
  word_t lhs_t_data, rhs_t_data;

  operand_transform #(.SA(SA), .DATA_W(DATA_W), .SUB_WORDS(AWORDS), .RHS_SIDE(1'b0)) u_lhs (
    .clk, .rst_n, .start(cmp_start), .busy(lhs_t_busy), .done(lhs_t_done),
    .buf_addr(a_buf_addr), .buf_data(a_buf_data),
    .out_valid(lhs_t_valid), .out_data(lhs_t_data), .out_afull(lhs_afull)
  );
  operand_transform #(.SA(SA), .DATA_W(DATA_W), .SUB_WORDS(BWORDS), .RHS_SIDE(1'b1)) u_rhs (
    .clk, .rst_n, .start(cmp_start), .busy(rhs_t_busy), .done(rhs_t_done),
    .buf_addr(b_buf_addr), .buf_data(b_buf_data),
    .out_valid(rhs_t_valid), .out_data(rhs_t_data), .out_afull(rhs_afull)
  );

  // LHS and RHS FIFO streams
  logic  lhs_in_ready, rhs_in_ready, lhs_valid, lhs_ready, rhs_valid, rhs_ready;
  word_t lhs_data, rhs_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] lhs_count, rhs_count;

  sync_fifo #(.W(SA * DATA_W), .DEPTH(FIFO_DEPTH), .AF_MARGIN(2)) u_lhs_fifo (
    .clk, .rst_n, .in_valid(lhs_t_valid), .in_ready(lhs_in_ready), .in_data(lhs_t_data),
    .out_valid(lhs_valid), .out_ready(lhs_ready), .out_data(lhs_data),
    .almost_full(lhs_afull), .count(lhs_count)
  );
  sync_fifo #(.W(SA * DATA_W), .DEPTH(FIFO_DEPTH), .AF_MARGIN(2)) u_rhs_fifo (
    .clk, .rst_n, .in_valid(rhs_t_valid), .in_ready(rhs_in_ready), .in_data(rhs_t_data),
    .out_valid(rhs_valid), .out_ready(rhs_ready), .out_data(rhs_data),
    .almost_full(rhs_afull), .count(rhs_count)
  );

  // GeMM micro-kernel
  logic  m_valid;
  word_t m_data;
  gemm_microkernel #(.SA(SA), .DATA_W(DATA_W), .MP(MP), .KP(KP), .NP(NP)) u_mk (
    .clk, .rst_n,
    .lhs_valid, .lhs_ready, .lhs_data,
    .rhs_valid, .rhs_ready, .rhs_data,
    .m_valid, .m_data
  );

  // Strassen C buffer
  strassen_c_buffer #(.SA(SA), .DATA_W(DATA_W), .MP(MP), .NP(NP), .AW(AW)) u_cbuf (
    .clk, .rst_n, .ready(c_ready),
    .m_valid, .m_data, .acc_done,
    .wb_start, .wb_addr, .wb_stride, .wb_busy, .wb_done,
    .wr_req_valid(c_wr_req_valid), .wr_req_ready(c_wr_req_ready),
    .wr_req_addr(c_wr_req_addr), .wr_req_len(c_wr_req_len),
    .wr_data_valid(c_wr_data_valid), .wr_data_ready(c_wr_data_ready), .wr_data(c_wr_data)
  );

  a_lhs_fifo_space: assert property (@(posedge clk) disable iff (!rst_n) lhs_t_valid |-> lhs_in_ready);
  a_rhs_fifo_space: assert property (@(posedge clk) disable iff (!rst_n) rhs_t_valid |-> rhs_in_ready);
endmodule
