// tb_gemm_microkernel: streams the LHS (8x8) and RHS (8x12) of several
// products into the micro-kernel (SA = 4), row by row, and compares every
// result word with the product computed here, in the order output tile
// (it, jt), row.  The first calls are fed with random gaps and a random skew
// between the LHS and RHS streams; the later ones back to back, where a call
// must take (MP/SA)*(NP/SA)*KP cycles, the systolic array's full rate.
module tb_gemm_microkernel;
  localparam int SA = 4, DW = 16, MP = 8, KP = 8, NP = 12, NC = 6;
  localparam int LW = MP * KP / SA, RW = KP * NP / SA, OW = MP * NP / SA;
  localparam int PERIOD = (MP / SA) * (NP / SA) * KP;
  typedef logic [SA-1:0][DW-1:0] word_t;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic lhs_valid, lhs_ready, rhs_valid, rhs_ready, m_valid;
  word_t lhs_data, rhs_data, m_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] L [NC][MP][KP];
  logic [DW-1:0] R [NC][KP][NP];
  int nl = 0, nr = 0, nout = 0, cyc = 0;
  int first_out [NC];
  bit gaps = 1;

  gemm_microkernel #(.SA(SA), .DATA_W(DW), .MP(MP), .KP(KP), .NP(NP)) dut (.*);

  always @(negedge clk) begin
    lhs_valid <= rst_n && nl < NC * LW && (!gaps || $urandom % 3 != 0);
    rhs_valid <= rst_n && nr < NC * RW && (!gaps || $urandom % 2 != 0);
  end
  always_comb begin
    for (int e = 0; e < SA; e++) begin
      lhs_data[e] = L[(nl / LW) % NC][(nl % LW) / (KP / SA)][((nl % LW) % (KP / SA)) * SA + e];
      rhs_data[e] = R[(nr / RW) % NC][(nr % RW) / (NP / SA)][((nr % RW) % (NP / SA)) * SA + e];
    end
  end
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (lhs_valid && lhs_ready) nl++;
      if (rhs_valid && rhs_ready) nr++;
      if (nl >= 2 * LW && nr >= 2 * RW) gaps = 0;
      if (m_valid) begin
        automatic int c = nout / OW, w = nout % OW;
        automatic int tile = w / SA, r = w % SA;
        automatic int it = tile / (NP / SA), jt = tile % (NP / SA);
        automatic logic [DW-1:0] e;
        if (w == 0) first_out[c] = cyc;
        for (int j = 0; j < SA; j++) begin
          e = '0;
          for (int p = 0; p < KP; p++) e += L[c][it * SA + r][p] * R[c][p][jt * SA + j];
          checks++;
          if (m_data[j] != e) begin failures++; if (failures < 5) $display("call %0d word %0d", c, w); end
        end
        nout++;
      end
    end
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < MP; i++) for (int p = 0; p < KP; p++) L[c][i][p] = DW'($urandom);
      for (int p = 0; p < KP; p++) for (int j = 0; j < NP; j++) R[c][p][j] = DW'($urandom);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nout < NC * OW) @(negedge clk);
    for (int c = 3; c < NC; c++) begin
      checks++;
      if (first_out[c] - first_out[c - 1] != PERIOD) begin
        failures++; $display("call %0d started %0d cycles after the previous", c, first_out[c] - first_out[c - 1]);
      end
    end
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
