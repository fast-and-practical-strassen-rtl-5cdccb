// operand_transform: "Compute LHS/RHS" - forms the transformed operand of each
// of the 49 products of the two-level Strassen algorithm and streams it out.
//
// After a start pulse it walks the products t = 0..48 (numbering of
// strassen_pkg) and, for each, the SUB_WORDS word offsets of a submatrix in
// row-major order.  For every offset it reads the same word of all 16
// buffered submatrices (read_buffer, one cycle latency) and adds the one, two
// or four of them that the product's left (RHS_SIDE = 0, matrix A) or right
// (RHS_SIDE = 1, matrix B) operand uses, with their signs, in the operand_sum
// instance of matching size.  One word per cycle is produced while the output
// FIFO is not almost full (out_afull); the FIFO must keep at least two free
// entries when it raises almost-full, because one read can be in flight.
// done pulses after the last word of product 48.  One instance serves A and
// another B, so LHS and RHS are computed in parallel as in the paper.
module operand_transform #(
  parameter int unsigned SA        = 16,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned SUB_WORDS = 256,   // words in one submatrix (m'k'/SA or k'n'/SA)
  parameter bit          RHS_SIDE  = 1'b0,
  localparam int unsigned BAW      = $clog2(SUB_WORDS)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  output logic [BAW-1:0]                  buf_addr,
  input  logic [15:0][SA-1:0][DATA_W-1:0] buf_data,
  output logic                            out_valid,
  output logic [SA-1:0][DATA_W-1:0]       out_data,
  input  logic                            out_afull
);
  import strassen_pkg::*;

  logic [5:0]     t;          // product being issued
  logic [BAW-1:0] a;          // word offset being issued
  logic           running;
  logic           issue;
  oplist_t        ol_issue, ol_q;
  logic           p_valid, p_last;

  assign busy     = running || p_valid;
  assign issue    = running && !out_afull;
  assign buf_addr = a;
  assign ol_issue = s2_oplist(int'(t), RHS_SIDE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; a <= '0; running <= 1'b0;
      p_valid <= 1'b0; p_last <= 1'b0; ol_q <= '0; done <= 1'b0;
    end else begin
      p_valid <= issue;
      p_last  <= issue && (t == 6'(NPROD - 1)) && (a == BAW'(SUB_WORDS - 1));
      done    <= p_valid && p_last;
      if (issue) ol_q <= ol_issue;
      if (start && !running) begin
        running <= 1'b1;
        t <= '0;
        a <= '0;
      end else if (issue) begin
        if (a == BAW'(SUB_WORDS - 1)) begin
          a <= '0;
          if (t == 6'(NPROD - 1)) running <= 1'b0;
          else                    t <= t + 1'b1;
        end else begin
          a <= a + 1'b1;
        end
      end
    end
  end

  // the three operand modules (four, two and one operand)
  logic [3:0][SA-1:0][DATA_W-1:0] ops4;
  logic [1:0][SA-1:0][DATA_W-1:0] ops2;
  logic [0:0][SA-1:0][DATA_W-1:0] ops1;
  logic [SA-1:0][DATA_W-1:0]      sum4, sum2, sum1;

  always_comb begin
    for (int i = 0; i < 4; i++) ops4[i] = buf_data[ol_q.idx[i]];
    for (int i = 0; i < 2; i++) ops2[i] = buf_data[ol_q.idx[i]];
    ops1[0] = buf_data[ol_q.idx[0]];
  end

  operand_sum #(.NOPS(4), .SA(SA), .DATA_W(DATA_W)) u_sum4 (.ops(ops4), .neg(ol_q.neg),      .sum(sum4));
  operand_sum #(.NOPS(2), .SA(SA), .DATA_W(DATA_W)) u_sum2 (.ops(ops2), .neg(ol_q.neg[1:0]), .sum(sum2));
  operand_sum #(.NOPS(1), .SA(SA), .DATA_W(DATA_W)) u_sum1 (.ops(ops1), .neg(ol_q.neg[0:0]), .sum(sum1));

  assign out_valid = p_valid;
  always_comb begin
    case (ol_q.nops)
      3'd4:    out_data = sum4;
      3'd2:    out_data = sum2;
      default: out_data = sum1;
    endcase
  end

  a_nops_legal: assert property (@(posedge clk) disable iff (!rst_n)
    p_valid |-> (ol_q.nops == 3'd1 || ol_q.nops == 3'd2 || ol_q.nops == 3'd4));
endmodule
