// outer_loop_ctrl: the three outer loops of the Strassen-squared kernel.
//
// C = A*B with A of dim_m x dim_k and B of dim_k x dim_n, all row-major in
// external memory with SA elements per word and word-aligned rows; every
// dimension must be a multiple of the 4x4 block size (4*MP, 4*KP, 4*NP).  The
// outermost loop walks the block rows bi of C, the middle loop its block
// columns bj, the innermost loop the k-blocks bk.  For each (bi, bj, bk) the
// controller
//   1. starts both read buffers on the A block (bi, bk) and the B block
//      (bk, bj) and waits until both are loaded,
//   2. starts the LHS and RHS computation of the 49 products and waits until
//      the C buffer has accumulated product 48,
//   3. after the last k-block, starts the write-back of the C block (bi, bj).
// Start addresses are word addresses; strides are the matrix row lengths in
// words.  done pulses when the last C block is written.  The loop nest is the
// paper's; running the steps one after another (no overlap of loading with
// computing) is this design's simplification.  The stride outputs are the
// dimension inputs divided by SA.  Since the dimensions are 16 bits wide, the
// upper stride bits are always zero; they are kept AW bits wide so that the
// read buffers and write-back can add them to full word addresses.
module outer_loop_ctrl #(
  parameter int unsigned SA = 16,
  parameter int unsigned MP = 64,
  parameter int unsigned KP = 64,
  parameter int unsigned NP = 64,
  parameter int unsigned AW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   dim_m,
  input  logic [15:0]   dim_k,
  input  logic [15:0]   dim_n,
  input  logic [AW-1:0] a_base,
  input  logic [AW-1:0] b_base,
  input  logic [AW-1:0] c_base,
  output logic          busy,
  output logic          done,
  // read buffers
  output logic          ld_start,
  output logic [AW-1:0] ld_a_addr,
  output logic [AW-1:0] ld_a_stride,
  output logic [AW-1:0] ld_b_addr,
  output logic [AW-1:0] ld_b_stride,
  input  logic          ld_a_done,
  input  logic          ld_b_done,
  // LHS/RHS computation and accumulation
  output logic          cmp_start,
  input  logic          acc_done,
  // C buffer write-back
  input  logic          c_ready,
  output logic          wb_start,
  output logic [AW-1:0] wb_addr,
  output logic [AW-1:0] wb_stride,
  input  logic          wb_done
);
  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_WAIT_LOAD, S_COMPUTE, S_WAIT_ACC,
                             S_WB, S_WAIT_WB } state_t;
  state_t state;

  logic [15:0] bi, bj, bk, nbi, nbj, nbk;
  logic        got_a, got_b;

  assign ld_a_stride = AW'(dim_k / SA);
  assign ld_b_stride = AW'(dim_n / SA);
  assign wb_stride   = AW'(dim_n / SA);
  // word address of the first row of each block
  assign ld_a_addr = a_base + AW'(bi) * AW'(4 * MP) * ld_a_stride + AW'(bk) * AW'(4 * KP / SA);
  assign ld_b_addr = b_base + AW'(bk) * AW'(4 * KP) * ld_b_stride + AW'(bj) * AW'(4 * NP / SA);
  assign wb_addr   = c_base + AW'(bi) * AW'(4 * MP) * wb_stride   + AW'(bj) * AW'(4 * NP / SA);

  assign busy      = (state != S_IDLE);
  assign ld_start  = (state == S_LOAD);
  assign cmp_start = (state == S_COMPUTE);
  assign wb_start  = (state == S_WB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; bi <= '0; bj <= '0; bk <= '0;
      nbi <= '0; nbj <= '0; nbk <= '0; got_a <= 1'b0; got_b <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          nbi <= 16'(dim_m / (4 * MP));
          nbj <= 16'(dim_n / (4 * NP));
          nbk <= 16'(dim_k / (4 * KP));
          bi <= '0; bj <= '0; bk <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (c_ready) begin
          got_a <= 1'b0;
          got_b <= 1'b0;
          state <= S_WAIT_LOAD;
        end
        S_WAIT_LOAD: begin
          if (ld_a_done) got_a <= 1'b1;
          if (ld_b_done) got_b <= 1'b1;
          if ((got_a || ld_a_done) && (got_b || ld_b_done)) state <= S_COMPUTE;
        end
        S_COMPUTE: state <= S_WAIT_ACC;
        S_WAIT_ACC: if (acc_done) begin
          if (bk == nbk - 1) begin
            bk    <= '0;
            state <= S_WB;
          end else begin
            bk    <= bk + 1'b1;
            state <= S_LOAD;
          end
        end
        S_WB: state <= S_WAIT_WB;
        S_WAIT_WB: if (wb_done) begin
          if (bj == nbj - 1) begin
            bj <= '0;
            if (bi == nbi - 1) begin
              bi    <= '0;
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              bi    <= bi + 1'b1;
              state <= S_LOAD;
            end
          end else begin
            bj    <= bj + 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
