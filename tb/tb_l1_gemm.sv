// tb_l1_gemm: feeds a 4x4 systolic array (K = 8) with random tiles, first
// back to back and then with random input gaps, and compares every output
// row with C = A*B computed here (modulo 2^DATA_W), including the row index.
// With back-to-back input it checks the timing: a new tile every K cycles and
// the first result row 2*SA+1 cycles after the tile's last input.
module tb_l1_gemm;
  localparam int SA = 4, DW = 16, K = 8, NT = 12;
  typedef logic [SA-1:0][DW-1:0] word_t;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid, in_first, in_last, out_valid;
  logic [$clog2(SA)-1:0] out_row;
  word_t a_in, b_in, out_data;
  int checks = 0, failures = 0;

  logic [DW-1:0] A [NT][SA][K];
  logic [DW-1:0] B [NT][K][SA];
  int last_in_cycle [NT];
  int cyc = 0, nout = 0;

  l1_gemm #(.SA(SA), .DATA_W(DW), .K(K)) dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      automatic int t = nout / SA, r = nout % SA;
      automatic logic [DW-1:0] e;
      checks++;
      if (int'(out_row) != r) failures++;
      for (int j = 0; j < SA; j++) begin
        e = '0;
        for (int p = 0; p < K; p++) e += A[t][r][p] * B[t][p][j];
        checks++;
        if (out_data[j] != e) begin failures++; if (failures < 5) $display("tile %0d row %0d col %0d", t, r, j); end
      end
      if (r == 0 && t < NT / 2) begin
        checks++;
        if (cyc - last_in_cycle[t] != 2 * SA + 1) begin
          failures++; $display("latency %0d", cyc - last_in_cycle[t]);
        end
      end
      nout++;
    end
  end

  initial begin
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < SA; i++) for (int p = 0; p < K; p++) begin
        A[t][i][p] = DW'($urandom); B[t][p][i] = DW'($urandom);
      end
    in_valid = 0; in_first = 0; in_last = 0; a_in = '0; b_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      for (int p = 0; p < K; p++) begin
        if (t >= NT / 2) while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (p == 0); in_last = (p == K - 1);
        for (int i = 0; i < SA; i++) begin a_in[i] = A[t][i][p]; b_in[i] = B[t][p][i]; end
        if (p == K - 1) last_in_cycle[t] = cyc + 1;
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (4 * SA + 10) @(negedge clk);
    checks++; if (nout != NT * SA) begin failures++; $display("%0d rows out", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
