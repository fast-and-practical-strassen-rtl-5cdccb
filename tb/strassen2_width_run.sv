// strassen2_width_run: one end-to-end run of the Strassen-squared kernel at a
// chosen element width, used to test the 8- and 32-bit variants.
//
// It instantiates the kernel at reduced size (4x4 systolic array, 8x8
// submatrices, so 32x32 blocks) with DATA_W set by its parameter, fills two
// stalling memory models with random DATA_W-bit matrices, runs a
// 64x64x64 multiplication (2x2x2 blocks, so k-accumulation and several
// write-backs happen) and compares every element of C with a direct product
// modulo 2^DATA_W.  It also checks the reported cycle count against the
// micro-kernel bound.  Interface: after reset it runs by itself; checks,
// failures and finished are outputs for the enclosing testbench, which owns
// the watchdog and $finish.  The element width is the only thing it varies;
// the test method follows tb_strassen2_top.
module strassen2_width_run #(
  parameter int DATA_W = 8
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int SA = 4, MP = 8, KP = 8, NP = 8, AW = 32;
  localparam int MAXD = 64;
  localparam int WORDS = MAXD * MAXD / SA;
  typedef logic [SA-1:0][DATA_W-1:0] word_t;

  logic start = 0;

  logic [15:0] dim_m, dim_k, dim_n;
  logic busy, done;
  logic [63:0] cycles;
  logic a_rq_v, a_rq_r, a_rs_v, b_rq_v, b_rq_r, b_rs_v;
  logic [AW-1:0] a_rq_a, b_rq_a, c_wq_a;
  logic [15:0] a_rq_l, b_rq_l, c_wq_l;
  word_t a_rs_d, b_rs_d, c_wd;
  logic c_wq_v, c_wq_r, c_wd_v, c_wd_r;

  strassen2_top #(.SA(SA), .DATA_W(DATA_W), .MP(MP), .KP(KP), .NP(NP), .AW(AW), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n, .start, .dim_m, .dim_k, .dim_n,
    .a_base('0), .b_base('0), .c_base('0), .busy, .done, .cycles,
    .a_rd_req_valid(a_rq_v), .a_rd_req_ready(a_rq_r), .a_rd_req_addr(a_rq_a), .a_rd_req_len(a_rq_l),
    .a_rd_resp_valid(a_rs_v), .a_rd_resp_data(a_rs_d),
    .b_rd_req_valid(b_rq_v), .b_rd_req_ready(b_rq_r), .b_rd_req_addr(b_rq_a), .b_rd_req_len(b_rq_l),
    .b_rd_resp_valid(b_rs_v), .b_rd_resp_data(b_rs_d),
    .c_wr_req_valid(c_wq_v), .c_wr_req_ready(c_wq_r), .c_wr_req_addr(c_wq_a), .c_wr_req_len(c_wq_l),
    .c_wr_data_valid(c_wd_v), .c_wr_data_ready(c_wd_r), .c_wr_data(c_wd)
  );

  logic nc0, nc1, nc2; word_t ncd0, ncd1;
  ext_mem_model #(.SA(SA), .DATA_W(DATA_W), .AW(AW), .WORDS(WORDS)) mem_a (
    .clk, .rst_n, .rd_req_valid(a_rq_v), .rd_req_ready(a_rq_r), .rd_req_addr(a_rq_a), .rd_req_len(a_rq_l),
    .rd_resp_valid(a_rs_v), .rd_resp_data(a_rs_d),
    .wr_req_valid(1'b0), .wr_req_ready(nc0), .wr_req_addr('0), .wr_req_len('0),
    .wr_data_valid(1'b0), .wr_data_ready(), .wr_data('0));
  ext_mem_model #(.SA(SA), .DATA_W(DATA_W), .AW(AW), .WORDS(WORDS)) mem_b (
    .clk, .rst_n, .rd_req_valid(b_rq_v), .rd_req_ready(b_rq_r), .rd_req_addr(b_rq_a), .rd_req_len(b_rq_l),
    .rd_resp_valid(b_rs_v), .rd_resp_data(b_rs_d),
    .wr_req_valid(1'b0), .wr_req_ready(nc1), .wr_req_addr('0), .wr_req_len('0),
    .wr_data_valid(1'b0), .wr_data_ready(), .wr_data('0));
  ext_mem_model #(.SA(SA), .DATA_W(DATA_W), .AW(AW), .WORDS(WORDS)) mem_c (
    .clk, .rst_n, .rd_req_valid(1'b0), .rd_req_ready(nc2), .rd_req_addr('0), .rd_req_len('0),
    .rd_resp_valid(), .rd_resp_data(ncd0),
    .wr_req_valid(c_wq_v), .wr_req_ready(c_wq_r), .wr_req_addr(c_wq_a), .wr_req_len(c_wq_l),
    .wr_data_valid(c_wd_v), .wr_data_ready(c_wd_r), .wr_data(c_wd));
  assign ncd1 = ncd0;


  logic [DATA_W-1:0] A [MAXD][MAXD];
  logic [DATA_W-1:0] B [MAXD][MAXD];

  task automatic run(input int M, input int K, input int N);
    logic [DATA_W-1:0] ref_v;
    word_t w;
    int minc;
    for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) A[i][j] = DATA_W'($urandom);
    for (int i = 0; i < K; i++) for (int j = 0; j < N; j++) B[i][j] = DATA_W'($urandom);
    for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) mem_a.mem[(i * K + j) / SA][j % SA] = A[i][j];
    for (int i = 0; i < K; i++) for (int j = 0; j < N; j++) mem_b.mem[(i * N + j) / SA][j % SA] = B[i][j];
    for (int i = 0; i < WORDS; i++) mem_c.mem[i] = '1;
    dim_m = 16'(M); dim_k = 16'(K); dim_n = 16'(N);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
      ref_v = '0;
      for (int p = 0; p < K; p++) ref_v += A[i][p] * B[p][j];
      w = mem_c.mem[(i * N + j) / SA];
      checks++;
      if (w[j % SA] !== ref_v) begin
        failures++;
        if (failures < 10) $display("C[%0d][%0d] = %h, expected %h", i, j, w[j % SA], ref_v);
      end
    end
    minc = (M / (4 * MP)) * (N / (4 * NP)) * (K / (4 * KP)) * 49 * (MP / SA) * (NP / SA) * KP;
    checks++;
    if (cycles < 64'(minc) || cycles > 64'(4 * minc)) begin
      failures++;
      $display("cycle count %0d outside [%0d, %0d]", cycles, minc, 4 * minc);
    end
    $display("DATA_W=%0d M=%0d K=%0d N=%0d: %0d cycles (micro-kernel bound %0d)", DATA_W, M, K, N, cycles, minc);
  endtask

  initial begin
    checks = 0;
    failures = 0;
    finished = 0;
    while (!rst_n) @(negedge clk);
    repeat (2) @(negedge clk);
    run(64, 64, 64);
    checks++; if (mem_a.bad_accesses + mem_b.bad_accesses + mem_c.bad_accesses != 0) failures++;
    finished = 1;
  end
endmodule
