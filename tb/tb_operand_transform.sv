// tb_operand_transform: runs the LHS (A side) and RHS (B side) operand
// computation against a model of the 16-bank read buffer filled with random
// words (one-cycle read latency, as read_buffer).  Every output word of all 49
// products is compared with the coefficient-weighted sum of the banks computed
// here.  The first run raises almost-full at random to check that issue stops
// and no word is lost; the second run never does and checks the rate: one
// word per cycle, 49*SUB_WORDS words from start to done.
module tb_operand_transform;
  import strassen_pkg::*;
  localparam int SA = 4, DW = 16, SUB_WORDS = 16;
  localparam int BAW = $clog2(SUB_WORDS);
  typedef logic [SA-1:0][DW-1:0] word_t;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  word_t bufmem [2][16][SUB_WORDS];
  logic [1:0] busy, done, out_valid, afull;
  logic [1:0][BAW-1:0] buf_addr;
  logic [1:0][15:0][SA-1:0][DW-1:0] buf_data;
  word_t out_data [2];
  int nout [2];

  for (genvar s = 0; s < 2; s++) begin : g_side
    operand_transform #(.SA(SA), .DATA_W(DW), .SUB_WORDS(SUB_WORDS), .RHS_SIDE(s[0])) dut (
      .clk, .rst_n, .start, .busy(busy[s]), .done(done[s]), .buf_addr(buf_addr[s]),
      .buf_data(buf_data[s]), .out_valid(out_valid[s]), .out_data(out_data[s]), .out_afull(afull[s]));
    always_ff @(posedge clk) for (int b = 0; b < 16; b++) buf_data[s][b] <= bufmem[s][b][buf_addr[s]];
    always @(posedge clk) if (rst_n && out_valid[s]) begin
      automatic int t = nout[s] / SUB_WORDS, a = nout[s] % SUB_WORDS;
      automatic word_t e = '0;
      for (int el = 0; el < SA; el++)
        for (int b = 0; b < 16; b++)
          e[el] += DW'(s ? s2_rhs(t, b) : s2_lhs(t, b)) * bufmem[s][b][a][el];
      checks++;
      if (out_data[s] != e) begin failures++; if (failures < 5) $display("side %0d t %0d a %0d", s, t, a); end
      nout[s]++;
    end
  end

  logic rand_afull;
  always @(negedge clk) afull <= rand_afull ? 2'($urandom) : 2'b00;

  task automatic run(input bit stall);
    int c;
    rand_afull = stall;
    nout[0] = 0; nout[1] = 0;
    for (int s = 0; s < 2; s++) for (int b = 0; b < 16; b++) for (int a = 0; a < SUB_WORDS; a++)
      bufmem[s][b][a] = {$urandom, $urandom};
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    c = 1;
    while (!done[0]) begin @(negedge clk); c++; end
    while (busy[1]) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (nout[0] != 49 * SUB_WORDS || nout[1] != 49 * SUB_WORDS) failures++;
    if (!stall) begin
      checks++;
      if (c != 49 * SUB_WORDS + 2) begin failures++; $display("took %0d cycles", c); end
    end
  endtask

  initial begin
    rand_afull = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b1);
    run(1'b0);
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
