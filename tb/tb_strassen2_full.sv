// tb_strassen2_full: the Strassen-squared kernel at its default size (16x16
// systolic array, 64x64 submatrices, 256x256 blocks): one 256x256x256
// multiplication (a single block, the smallest size the kernel is evaluated
// on) and one 512x512x512 multiplication (2x2 C blocks, 2 k-blocks each).
//
// Random A and B are placed in three stalling memory models and every element
// of C is compared with a direct triple-loop product computed here, modulo
// 2^DATA_W.  It also checks that 4-, 2- and 1-operand sums, accumulation over
// k-blocks, FIFO back-pressure, ping-pong stalls and memory stalls occurred.  The cycle count reported
// by the kernel is checked against a lower bound of 49 products of
// (MP/SA)*(NP/SA)*KP cycles per block multiplication.
module tb_strassen2_full;
  localparam int SA = 16, DATA_W = 16, MP = 64, KP = 64, NP = 64, AW = 32;
  localparam int MAXD = 512;
  localparam int WORDS = MAXD * MAXD / SA;
  typedef logic [SA-1:0][DATA_W-1:0] word_t;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = !clk;

  logic [15:0] dim_m, dim_k, dim_n;
  logic busy, done;
  logic [63:0] cycles;
  logic a_rq_v, a_rq_r, a_rs_v, b_rq_v, b_rq_r, b_rs_v;
  logic [AW-1:0] a_rq_a, b_rq_a, c_wq_a;
  logic [15:0] a_rq_l, b_rq_l, c_wq_l;
  word_t a_rs_d, b_rs_d, c_wd;
  logic c_wq_v, c_wq_r, c_wd_v, c_wd_r;

  strassen2_top dut (
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

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_op4 = 0, n_op2 = 0, n_op1 = 0, n_kacc = 0, n_wb = 0, n_afull = 0, n_pp_stall = 0, n_loads = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_lhs.p_valid) begin
      case (dut.u_lhs.ol_q.nops) 3'd4: n_op4++; 3'd2: n_op2++; 3'd1: n_op1++; default: ; endcase
    end
    if (dut.u_rhs.p_valid) begin
      case (dut.u_rhs.ol_q.nops) 3'd4: n_op4++; 3'd2: n_op2++; 3'd1: n_op1++; default: ; endcase
    end
    if (dut.acc_done && dut.u_ctrl.bk != 0) n_kacc++;
    if (dut.wb_done) n_wb++;
    if (dut.ld_a_done) n_loads++;
    if (dut.u_lhs.running && dut.lhs_afull) n_afull++;
    if (dut.lhs_valid && !dut.lhs_ready) n_pp_stall++;
  end

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
    $display("M=%0d K=%0d N=%0d: %0d cycles (micro-kernel bound %0d)", M, K, N, cycles, minc);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run(256, 256, 256);
    run(512, 512, 512);
    checks++; if (mem_a.bad_accesses + mem_b.bad_accesses + mem_c.bad_accesses != 0) failures++;
    $display("mechanisms: op4=%0d op2=%0d op1=%0d k_accumulations=%0d writebacks=%0d loads=%0d fifo_afull=%0d pingpong_stalls=%0d mem_stalls=%0d",
             n_op4, n_op2, n_op1, n_kacc, n_wb, n_loads, n_afull, n_pp_stall, mem_a.stall_cycles);
    checks++; if (n_op4 == 0) failures++;
    checks++; if (n_op2 == 0) failures++;
    checks++; if (n_op1 == 0) failures++;
    checks++; if (n_wb != 5) failures++;
    checks++; if (n_kacc == 0) failures++;
    checks++; if (n_afull == 0) failures++;
    checks++; if (n_pp_stall == 0) failures++;
    checks++; if (mem_a.stall_cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
