// tb_outer_loop_ctrl: runs the outer-loop controller (SA = 4, 8x8
// submatrices, so 32x32 blocks) on a 64x64 by 64x96 multiplication against
// responders that answer each load, compute and write-back request after a
// random delay.  The sequence of requests and their block addresses must
// follow the loop nest bi (C block rows), bj (C block columns), bk (k-blocks),
// with one write-back after the last k-block of every C block, and done must
// pulse once at the end.  A second run with other sizes follows.
module tb_outer_loop_ctrl;
  localparam int SA = 4, MP = 8, KP = 8, NP = 8, AW = 32;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = !clk;
  logic [15:0] dim_m, dim_k, dim_n;
  logic [AW-1:0] a_base, b_base, c_base;
  logic busy, done, ld_start, cmp_start, wb_start;
  logic ld_a_done = 0, ld_b_done = 0, acc_done = 0, wb_done = 0, c_ready = 0;
  logic [AW-1:0] ld_a_addr, ld_a_stride, ld_b_addr, ld_b_stride, wb_addr, wb_stride;
  int checks = 0, failures = 0;

  outer_loop_ctrl #(.SA(SA), .MP(MP), .KP(KP), .NP(NP), .AW(AW)) dut (.*);

  typedef struct { int kind; longint a; longint b; } ev_t;   // 0 load, 1 compute, 2 write-back
  ev_t got [$];
  int n_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (ld_start && c_ready) got.push_back('{0, longint'(ld_a_addr), longint'(ld_b_addr)});
    if (cmp_start) got.push_back('{1, 0, 0});
    if (wb_start) got.push_back('{2, longint'(wb_addr), longint'(wb_stride)});
    if (done) n_done++;
  end

  // responders, one per request type
  always @(negedge clk) if (rst_n && ld_start && c_ready) begin
    repeat (1 + $urandom % 6) @(negedge clk); ld_a_done = 1; @(negedge clk); ld_a_done = 0;
  end
  always @(negedge clk) if (rst_n && ld_start && c_ready) begin
    repeat (1 + $urandom % 6) @(negedge clk); ld_b_done = 1; @(negedge clk); ld_b_done = 0;
  end
  always @(negedge clk) if (rst_n && cmp_start) begin
    repeat (1 + $urandom % 5) @(negedge clk); acc_done = 1; @(negedge clk); acc_done = 0;
  end
  always @(negedge clk) if (rst_n && wb_start) begin
    repeat (1 + $urandom % 5) @(negedge clk); wb_done = 1; @(negedge clk); wb_done = 0;
  end

  task automatic run(input int M, input int K, input int N);
    ev_t exp_q [$];
    for (int bi = 0; bi < M / (4 * MP); bi++)
      for (int bj = 0; bj < N / (4 * NP); bj++)
        for (int bk = 0; bk < K / (4 * KP); bk++) begin
          exp_q.push_back('{0, 100 + bi * 4 * MP * (K / SA) + bk * 4 * KP / SA,
                               2000 + bk * 4 * KP * (N / SA) + bj * 4 * NP / SA});
          exp_q.push_back('{1, 0, 0});
          if (bk == K / (4 * KP) - 1)
            exp_q.push_back('{2, 5000 + bi * 4 * MP * (N / SA) + bj * 4 * NP / SA, N / SA});
        end
    got.delete(); n_done = 0;
    dim_m = 16'(M); dim_k = 16'(K); dim_n = 16'(N);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (n_done != 1) failures++;
    checks++; if (got.size() != exp_q.size()) begin failures++; $display("%0d events, expected %0d", got.size(), exp_q.size()); end
    for (int i = 0; i < exp_q.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp_q[i]) begin
        failures++;
        if (failures < 6) $display("event %0d: %0d %0d %0d expected %0d %0d %0d", i, got[i].kind, got[i].a, got[i].b, exp_q[i].kind, exp_q[i].a, exp_q[i].b);
      end
    end
    checks++; if (ld_a_stride != AW'(K / SA) || ld_b_stride != AW'(N / SA)) failures++;
  endtask

  initial begin
    a_base = 100; b_base = 2000; c_base = 5000;
    dim_m = 0; dim_k = 0; dim_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    c_ready = 1;
    run(64, 64, 96);
    run(96, 96, 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
