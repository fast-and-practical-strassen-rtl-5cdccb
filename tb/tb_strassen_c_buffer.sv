// tb_strassen_c_buffer: feeds the C buffer (SA = 4, 8x8 submatrices) with
// random product words for 49 products, twice (two k-blocks), then writes the
// 32x32 block into a stalling memory model inside a wider matrix and compares
// every element with the sum, over both k-blocks, of the products weighted by
// the output coefficients, computed here.  A third round, with a single
// k-block, checks that write-back cleared the buffer.  It also checks
// acc_done (once per 49 products), the burst requests (one per block row, 4*NP/SA
// words) and that no word outside the block is written.
module tb_strassen_c_buffer;
  import strassen_pkg::*;
  localparam int SA = 4, DW = 16, MP = 8, NP = 8, AW = 32;
  localparam int OW = MP * NP / SA, NW = NP / SA;
  localparam int STRIDE = 24, BASE = 4, ROWS = 4 * MP + 2;
  typedef logic [SA-1:0][DW-1:0] word_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic ready, m_valid, acc_done, wb_start = 0, wb_busy, wb_done;
  word_t m_data, wr_data;
  logic wq_v, wq_r, wd_v, wd_r;
  logic [AW-1:0] wq_a; logic [15:0] wq_l;
  int checks = 0, failures = 0, n_acc_done = 0, n_req = 0;

  strassen_c_buffer #(.SA(SA), .DATA_W(DW), .MP(MP), .NP(NP), .AW(AW)) dut (
    .clk, .rst_n, .ready, .m_valid, .m_data, .acc_done,
    .wb_start, .wb_addr(AW'(BASE)), .wb_stride(AW'(STRIDE)), .wb_busy, .wb_done,
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_len(wq_l),
    .wr_data_valid(wd_v), .wr_data_ready(wd_r), .wr_data);

  logic nc; word_t ncd;
  ext_mem_model #(.SA(SA), .DATA_W(DW), .AW(AW), .WORDS(ROWS * STRIDE)) mem (
    .clk, .rst_n, .rd_req_valid(1'b0), .rd_req_ready(nc), .rd_req_addr('0), .rd_req_len('0),
    .rd_resp_valid(), .rd_resp_data(ncd),
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_len(wq_l),
    .wr_data_valid(wd_v), .wr_data_ready(wd_r), .wr_data);

  always @(posedge clk) if (rst_n) begin
    if (acc_done) n_acc_done++;
    if (wq_v && wq_r) begin
      checks++;
      if (wq_a != AW'(BASE + n_req * STRIDE) || wq_l != 16'(4 * NW)) failures++;
      n_req++;
    end
  end

  // expected block, element [row][col] of the 4*MP x 4*NP block
  logic [DW-1:0] C [4 * MP][4 * NP];

  task automatic feed_products();
    word_t w;
    for (int t = 0; t < 49; t++)
      for (int x = 0; x < OW; x++) begin
        while ($urandom % 4 == 0) begin m_valid = 0; @(negedge clk); end
        w = {$urandom, $urandom};
        m_valid = 1; m_data = w;
        begin
          automatic int tile = x / SA, r = x % SA;
          automatic int row = (tile / NW) * SA + r, col0 = (tile % NW) * SA;
          for (int b = 0; b < 16; b++)
            for (int e = 0; e < SA; e++)
              C[(b / 4) * MP + row][(b % 4) * NP + col0 + e] += DW'(s2_out(t, b)) * w[e];
        end
        @(negedge clk);
      end
    m_valid = 0;
  endtask

  task automatic write_back_and_check();
    word_t w;
    n_req = 0;
    for (int i = 0; i < ROWS * STRIDE; i++) mem.mem[i] = '1;
    @(negedge clk) wb_start = 1;
    @(negedge clk) wb_start = 0;
    while (!wb_done) @(negedge clk);
    checks++; if (n_req != 4 * MP) failures++;
    for (int i = 0; i < ROWS; i++) for (int wd = 0; wd < STRIDE; wd++) begin
      w = mem.mem[i * STRIDE + wd];
      if (i < 4 * MP && wd >= BASE && wd < BASE + 4 * NW) begin
        for (int e = 0; e < SA; e++) begin
          checks++;
          if (w[e] != C[i][(wd - BASE) * SA + e]) begin failures++; if (failures < 5) $display("C[%0d][%0d]", i, (wd - BASE) * SA + e); end
        end
      end else begin
        checks++;
        if (w != '1) failures++;
      end
    end
  endtask

  initial begin
    m_valid = 0; m_data = '0;
    for (int i = 0; i < 4 * MP; i++) for (int j = 0; j < 4 * NP; j++) C[i][j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    feed_products();
    feed_products();
    repeat (3) @(negedge clk);
    checks++; if (n_acc_done != 2) failures++;
    write_back_and_check();
    for (int i = 0; i < 4 * MP; i++) for (int j = 0; j < 4 * NP; j++) C[i][j] = '0;
    feed_products();
    write_back_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
