// tb_read_buffer: loads a 4x4 block (submatrices 8x16, SA = 4) out of the
// middle of a larger random matrix held in a stalling memory model, twice from
// two block positions, and reads back every word of every submatrix through
// the one-cycle read port, comparing with the matrix.  It checks the burst
// requests (one per block row, 4*SUB_C/SA words, at the right addresses) and
// that the load, with the memory stalling about one cycle in four, takes at
// most three cycles per word.
module tb_read_buffer;
  localparam int SA = 4, DW = 16, SUB_R = 8, SUB_C = 16, AW = 32;
  localparam int ROWS = 64, COLS = 128;                 // whole matrix
  localparam int STRIDE = COLS / SA;
  localparam int DEPTH = SUB_R * SUB_C / SA;
  typedef logic [SA-1:0][DW-1:0] word_t;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  always #5 clk = !clk;
  logic [AW-1:0] base_addr;
  logic rq_v, rq_r, rs_v;
  logic [AW-1:0] rq_a; logic [15:0] rq_l;
  word_t rs_d;
  logic [$clog2(DEPTH)-1:0] buf_addr;
  logic [15:0][SA-1:0][DW-1:0] buf_data;
  int checks = 0, failures = 0;

  read_buffer #(.SA(SA), .DATA_W(DW), .SUB_R(SUB_R), .SUB_C(SUB_C), .AW(AW)) dut (
    .clk, .rst_n, .start, .base_addr, .stride(AW'(STRIDE)), .busy, .done,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a), .rd_req_len(rq_l),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d), .buf_addr, .buf_data);

  logic nc; word_t ncd;
  ext_mem_model #(.SA(SA), .DATA_W(DW), .AW(AW), .WORDS(ROWS * STRIDE)) mem (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a), .rd_req_len(rq_l),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .wr_req_valid(1'b0), .wr_req_ready(nc), .wr_req_addr('0), .wr_req_len('0),
    .wr_data_valid(1'b0), .wr_data_ready(), .wr_data(ncd));

  int nreq; logic [AW-1:0] exp_addr;
  always @(posedge clk) if (rst_n && rq_v && rq_r) begin
    checks++;
    if (rq_a != exp_addr + AW'(nreq * STRIDE) || rq_l != 16'(4 * SUB_C / SA)) begin
      failures++; $display("request %0d: addr %0d len %0d", nreq, rq_a, rq_l);
    end
    nreq++;
  end

  task automatic load_and_check(input int r0, input int c0);
    int t0;
    word_t w;
    exp_addr = AW'(r0 * STRIDE + c0 / SA); nreq = 0;
    base_addr = exp_addr;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    checks++; if (nreq != 4 * SUB_R) failures++;
    checks++; if (t0 > 3 * 16 * DEPTH) begin failures++; $display("load took %0d cycles", t0); end
    for (int a = 0; a < DEPTH; a++) begin
      buf_addr = $clog2(DEPTH)'(a);
      @(negedge clk);
      for (int b = 0; b < 16; b++) begin
        w = mem.mem[(r0 + (b / 4) * SUB_R + a / (SUB_C / SA)) * STRIDE + (c0 / SA) + (b % 4) * (SUB_C / SA) + a % (SUB_C / SA)];
        checks++;
        if (buf_data[b] != w) begin failures++; if (failures < 5) $display("bank %0d addr %0d", b, a); end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < ROWS * STRIDE; i++) mem.mem[i] = {$urandom, $urandom};
    buf_addr = '0; base_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_and_check(0, 64);
    load_and_check(32, 0);
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
