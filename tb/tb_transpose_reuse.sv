// tb_transpose_reuse: streams three random 8x12 submatrices (SA = 4) into the
// LHS transpose/reuse stage with random gaps while the consumer takes words
// with random stalls.  Each output word must be column p of the current row
// tile, every tile repeated NT times, in the order it, jt, p, with first/last
// on p = 0 and p = K-1.  It also checks that the second submatrix is accepted
// while the first is still being read (ping-pong) and the rate when both sides
// are always ready: one output word per cycle.
module tb_transpose_reuse;
  localparam int SA = 4, DW = 16, M = 8, K = 12, NT = 3, NMAT = 3;
  typedef logic [SA-1:0][DW-1:0] word_t;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid, in_ready, out_valid, out_ready, out_first, out_last;
  word_t in_data, out_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] mat [NMAT][M][K];
  bit stall_mode;

  transpose_reuse #(.SA(SA), .DATA_W(DW), .M(M), .K(K), .NT(NT)) dut (.*);

  int nin = 0, nout = 0, overlap = 0, full_rate_cycles = 0;
  always @(negedge clk) begin
    in_valid  <= (nin < NMAT * M * K / SA) && (!stall_mode || ($urandom % 3 != 0));
    out_ready <= !stall_mode || ($urandom % 3 != 0);
  end
  always_comb begin
    automatic int m = nin / (M * K / SA), w = nin % (M * K / SA);
    for (int e = 0; e < SA; e++) in_data[e] = mat[m % NMAT][w / (K / SA)][(w % (K / SA)) * SA + e];
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      nin++;
      if (nout > 0 && nout % (M / SA * NT * K) != 0) overlap++;
    end
    if (out_valid && out_ready) begin
      automatic int per = (M / SA) * NT * K;
      automatic int m = nout / per, r = nout % per;
      automatic int it = r / (NT * K), p = r % K;
      for (int e = 0; e < SA; e++) begin
        checks++;
        if (out_data[e] != mat[m % NMAT][it * SA + e][p]) failures++;
      end
      checks++;
      if (out_first != (p == 0) || out_last != (p == K - 1)) failures++;
      nout++;
    end
  end

  initial begin
    int c;
    for (int m = 0; m < NMAT; m++) for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) mat[m][i][j] = DW'($urandom);
    stall_mode = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nout < NMAT * (M / SA) * NT * K) @(negedge clk);
    checks++; if (overlap == 0) begin failures++; $display("no ping-pong overlap"); end
    // rate: fresh data, both sides always ready
    stall_mode = 0;
    nin = 0; nout = 0;
    for (int m = 0; m < NMAT; m++) for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) mat[m][i][j] = DW'($urandom);
    while (!out_valid) @(negedge clk);
    c = 0;
    while (nout < NMAT * (M / SA) * NT * K) begin @(negedge clk); c++; end
    checks++;
    if (c != NMAT * (M / SA) * NT * K) begin failures++; $display("stream took %0d cycles", c); end
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
