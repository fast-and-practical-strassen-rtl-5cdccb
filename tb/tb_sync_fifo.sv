// tb_sync_fifo: random pushes and pops on a 6-entry FIFO, compared with a
// queue kept by the testbench: data order, count, valid/ready, almost-full
// (two free entries left) and that a word written to an empty FIFO can be
// read in the next cycle.
module tb_sync_fifo;
  localparam int W = 12, DEPTH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid, in_ready, out_valid, out_ready, almost_full;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH), .AF_MARGIN(2)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0 ^ (i > 1500 && i < 1600);
      out_ready = ($urandom % 2) != 0 && !(i > 1000 && i < 1100);
      in_data   = W'($urandom);
      #1;
      check(int'(count) == q.size(), "count");
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      check(almost_full == (q.size() + 2 >= DEPTH), "almost_full");
      if (out_valid) check(out_data == q[0], "data");
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
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
