// ext_mem_model: behavioural model of one external memory (HBM/DDR) channel
// for simulation only; it is not synthesizable design and stands in for the
// FPGA card's memory.
//
// Word-addressed array of WORDS words of SA x DATA_W bits, which a testbench
// fills and inspects directly through the mem array.  Read port: a burst
// request (address, length in words) is accepted when the port is idle; the
// words are then returned in order on rd_resp_valid/rd_resp_data, one per
// cycle at most.  Write port: a burst request is accepted when idle, then that
// many words are taken on wr_data_valid/wr_data_ready.  With STALL set, the
// ready signals and the response valid drop at random (about one cycle in four)
// to exercise the kernel's handshakes.  Accesses outside the array are counted
// in bad_accesses.
module ext_mem_model #(
  parameter int unsigned SA     = 4,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned AW     = 32,
  parameter int unsigned WORDS  = 1024,
  parameter bit          STALL  = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rd_req_valid,
  output logic                      rd_req_ready,
  input  logic [AW-1:0]             rd_req_addr,
  input  logic [15:0]               rd_req_len,
  output logic                      rd_resp_valid,
  output logic [SA-1:0][DATA_W-1:0] rd_resp_data,
  input  logic                      wr_req_valid,
  output logic                      wr_req_ready,
  input  logic [AW-1:0]             wr_req_addr,
  input  logic [15:0]               wr_req_len,
  input  logic                      wr_data_valid,
  output logic                      wr_data_ready,
  input  logic [SA-1:0][DATA_W-1:0] wr_data
);
  logic [SA-1:0][DATA_W-1:0] mem [WORDS];
  int unsigned bad_accesses = 0;
  int unsigned stall_cycles = 0;

  logic          r_active, w_active;
  logic [AW-1:0] r_addr, w_addr;
  logic [15:0]   r_left, w_left;
  logic          go_r, go_w, go_rq, go_wq;

  always_ff @(negedge clk) begin
    go_r  <= !STALL || ($urandom % 4 != 0);
    go_w  <= !STALL || ($urandom % 4 != 0);
    go_rq <= !STALL || ($urandom % 4 != 0);
    go_wq <= !STALL || ($urandom % 4 != 0);
  end

  assign rd_req_ready  = !r_active && go_rq;
  assign wr_req_ready  = !w_active && go_wq;
  assign wr_data_ready = w_active && go_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_active <= 1'b0; w_active <= 1'b0; rd_resp_valid <= 1'b0;
      r_addr <= '0; r_left <= '0; w_addr <= '0; w_left <= '0;
    end else begin
      rd_resp_valid <= 1'b0;
      if (rd_req_valid && rd_req_ready) begin
        r_active <= 1'b1;
        r_addr   <= rd_req_addr;
        r_left   <= rd_req_len;
      end else if (r_active) begin
        if (go_r) begin
          rd_resp_valid <= 1'b1;
          if (r_addr < WORDS) rd_resp_data <= mem[r_addr];
          else begin rd_resp_data <= '0; bad_accesses++; end
          r_addr <= r_addr + 1'b1;
          r_left <= r_left - 1'b1;
          if (r_left == 16'd1) r_active <= 1'b0;
        end else begin
          stall_cycles++;
        end
      end
      if (wr_req_valid && wr_req_ready) begin
        w_active <= 1'b1;
        w_addr   <= wr_req_addr;
        w_left   <= wr_req_len;
      end else if (wr_data_valid && wr_data_ready) begin
        if (w_addr < WORDS) mem[w_addr] <= wr_data;
        else bad_accesses++;
        w_addr <= w_addr + 1'b1;
        w_left <= w_left - 1'b1;
        if (w_left == 16'd1) w_active <= 1'b0;
      end
    end
  end
endmodule
