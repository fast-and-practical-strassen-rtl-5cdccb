// tb_operand_sum: random words and signs into the 4-, 2- and 1-operand
// adders; each element of each sum is compared with a sum formed here,
// modulo 2^DATA_W.
module tb_operand_sum;
  localparam int SA = 4, DW = 8;
  logic [3:0][SA-1:0][DW-1:0] ops4;
  logic [1:0][SA-1:0][DW-1:0] ops2;
  logic [0:0][SA-1:0][DW-1:0] ops1;
  logic [3:0] neg4; logic [1:0] neg2; logic [0:0] neg1;
  logic [SA-1:0][DW-1:0] s4, s2, s1;
  logic clk = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  operand_sum #(.NOPS(4), .SA(SA), .DATA_W(DW)) u4 (.ops(ops4), .neg(neg4), .sum(s4));
  operand_sum #(.NOPS(2), .SA(SA), .DATA_W(DW)) u2 (.ops(ops2), .neg(neg2), .sum(s2));
  operand_sum #(.NOPS(1), .SA(SA), .DATA_W(DW)) u1 (.ops(ops1), .neg(neg1), .sum(s1));

  initial begin
    logic [DW-1:0] e4, e2, e1;
    for (int n = 0; n < 500; n++) begin
      ops4 = {$urandom, $urandom, $urandom, $urandom}; neg4 = 4'($urandom);
      ops2 = {$urandom};  neg2 = 2'($urandom);
      ops1 = {$urandom};  neg1 = 1'($urandom);
      #1;
      for (int e = 0; e < SA; e++) begin
        e4 = '0; e2 = '0;
        for (int i = 0; i < 4; i++) e4 = neg4[i] ? e4 - ops4[i][e] : e4 + ops4[i][e];
        for (int i = 0; i < 2; i++) e2 = neg2[i] ? e2 - ops2[i][e] : e2 + ops2[i][e];
        e1 = neg1[0] ? -ops1[0][e] : ops1[0][e];
        checks += 3;
        if (s4[e] != e4) failures++;
        if (s2[e] != e2) failures++;
        if (s1[e] != e1) failures++;
      end
    end
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
