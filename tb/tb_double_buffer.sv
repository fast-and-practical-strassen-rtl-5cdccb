// tb_double_buffer: streams three random 12x8 submatrices (SA = 4) into the
// RHS double buffer with random gaps while the consumer takes words with
// random stalls.  Each output word must be row p, column tile jt of the
// submatrix, the whole sequence repeated MT times, in the order it, jt, p.  It also checks that the second submatrix is accepted
// while the first is still being read (ping-pong) and the rate when both sides
// are always ready: one output word per cycle.
module tb_double_buffer;
  localparam int SA = 4, DW = 16, K = 12, N = 8, MT = 3, NMAT = 3;
  typedef logic [SA-1:0][DW-1:0] word_t;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid, in_ready, out_valid, out_ready;
  word_t in_data, out_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] mat [NMAT][K][N];
  bit stall_mode;

  double_buffer #(.SA(SA), .DATA_W(DW), .K(K), .N(N), .MT(MT)) dut (.*);

  int nin = 0, nout = 0, overlap = 0, full_rate_cycles = 0;
  always @(negedge clk) begin
    in_valid  <= (nin < NMAT * K * N / SA) && (!stall_mode || ($urandom % 3 != 0));
    out_ready <= !stall_mode || ($urandom % 3 != 0);
  end
  always_comb begin
    automatic int m = nin / (K * N / SA), w = nin % (K * N / SA);
    for (int e = 0; e < SA; e++) in_data[e] = mat[m % NMAT][w / (N / SA)][(w % (N / SA)) * SA + e];
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      nin++;
      if (nout > 0 && nout % (MT * (N / SA) * K) != 0) overlap++;
    end
    if (out_valid && out_ready) begin
      automatic int per = MT * (N / SA) * K;
      automatic int m = nout / per, r = nout % per;
      automatic int jt = (r / K) % (N / SA), p = r % K;
      for (int e = 0; e < SA; e++) begin
        checks++;
        if (out_data[e] != mat[m % NMAT][p][jt * SA + e]) failures++;
      end
      nout++;
    end
  end

  initial begin
    int c;
    for (int m = 0; m < NMAT; m++) for (int i = 0; i < K; i++) for (int j = 0; j < N; j++) mat[m][i][j] = DW'($urandom);
    stall_mode = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nout < NMAT * MT * (N / SA) * K) @(negedge clk);
    checks++; if (overlap == 0) begin failures++; $display("no ping-pong overlap"); end
    // rate: fresh data, both sides always ready
    stall_mode = 0;
    nin = 0; nout = 0;
    for (int m = 0; m < NMAT; m++) for (int i = 0; i < K; i++) for (int j = 0; j < N; j++) mat[m][i][j] = DW'($urandom);
    while (!out_valid) @(negedge clk);
    c = 0;
    while (nout < NMAT * MT * (N / SA) * K) begin @(negedge clk); c++; end
    checks++;
    if (c != NMAT * MT * (N / SA) * K) begin failures++; $display("stream took %0d cycles", c); end
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
