// tb_cycle_counter: starts the counter, stops it after a random number of
// cycles and checks the count, that it holds afterwards and that a new start
// clears it.
module tb_cycle_counter;
  logic clk = 0, rst_n = 0, start = 0, stop = 0, running;
  logic [63:0] cycles;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  cycle_counter #(.W(64)) dut (.*);
  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      n = 1 + $urandom % 300;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      checks++; if (!running) failures++;
      repeat (n - 1) @(negedge clk);
      stop = 1;
      @(negedge clk) stop = 0;
      checks++; if (cycles != 64'(n) || running) begin failures++; $display("count %0d expected %0d", cycles, n); end
      repeat ($urandom % 20) @(negedge clk);
      checks++; if (cycles != 64'(n)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
