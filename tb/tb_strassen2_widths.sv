// tb_strassen2_widths: end-to-end test of the 8-bit and 32-bit variants of
// the Strassen-squared kernel.
//
// The kernel is built for one element width, set by DATA_W; the default is
// 16 bits, tested by tb_strassen2_top and tb_strassen2_full.  This testbench
// runs two instances of strassen2_width_run side by side, one with DATA_W = 8
// and one with DATA_W = 32.  Each multiplies random 64x64 matrices at reduced
// size and checks every element of C modulo 2^DATA_W.  The checks of both are
// summed here; a watchdog ends the test if either does not finish.
module tb_strassen2_widths;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  int checks8, failures8, checks32, failures32;
  logic fin8, fin32;

  strassen2_width_run #(.DATA_W(8))  u_w8  (.clk, .rst_n, .checks(checks8),  .failures(failures8),  .finished(fin8));
  strassen2_width_run #(.DATA_W(32)) u_w32 (.clk, .rst_n, .checks(checks32), .failures(failures32), .finished(fin32));

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    while (!(fin8 && fin32)) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks8 + checks32, failures8 + failures32);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks8 + checks32, failures8 + failures32 + 1);
    $finish;
  end
endmodule
