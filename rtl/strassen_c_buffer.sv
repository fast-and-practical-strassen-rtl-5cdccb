// strassen_c_buffer: the "Strassens C Buffer (4x4)" - on-chip accumulation of
// the 49 intermediate products into the 16 output submatrices C00..C33, and
// write-back of the finished 4x4 block to external memory.
//
// 16 banks hold one MP x NP output submatrix each (row-major, SA elements per
// word).  Product words arrive from the micro-kernel in its order (product
// t = 0..48; per product, output tiles it, jt; per tile, rows 0..SA-1) and are
// counted here to find the product number and the word address.  Each word is
// added to, or subtracted from, the same word of every submatrix whose
// coefficient for product t is +1 or -1 (strassen_pkg::s2_out), in all 16
// banks in the same cycle: the parallel accumulation of the paper.  A product
// therefore never has to be stored; one word per cycle is accepted, without
// back-pressure.  acc_done pulses after the last word of product 48.  The
// buffer is not cleared between the k-steps of the outer loop, so products of
// several k-blocks add up in it.
//
// wb_start writes the 4*MP x 4*NP block out as 4*MP bursts of 4*NP/SA words
// (the paper's bursts of 4n'), row R at wb_addr + R*wb_stride, each burst a
// request (wr_req_*) followed by its data (wr_data_*), both valid/ready.  Each
// word read out is cleared to zero, so the buffer is ready for the next block;
// after reset all words are first cleared (ready low for MP*NP/SA cycles).
// wb_done pulses after the last word.  Accumulation and write-back must not
// overlap; the outer-loop controller sequences them.  Arithmetic wraps at
// DATA_W bits.  The read-and-clear and the clear after reset are this
// design's choices; the paper is silent on how the buffer is emptied.
module strassen_c_buffer #(
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned MP     = 64,
  parameter int unsigned NP     = 64,
  parameter int unsigned AW     = 32,
  localparam int unsigned NW    = NP / SA,
  localparam int unsigned DEPTH = MP * NW,
  localparam int unsigned BAW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      ready,
  // product stream from the micro-kernel
  input  logic                      m_valid,
  input  logic [SA-1:0][DATA_W-1:0] m_data,
  output logic                      acc_done,
  // write-back control
  input  logic                      wb_start,
  input  logic [AW-1:0]             wb_addr,
  input  logic [AW-1:0]             wb_stride,
  output logic                      wb_busy,
  output logic                      wb_done,
  // burst writes to external memory
  output logic                      wr_req_valid,
  input  logic                      wr_req_ready,
  output logic [AW-1:0]             wr_req_addr,
  output logic [15:0]               wr_req_len,
  output logic                      wr_data_valid,
  input  logic                      wr_data_ready,
  output logic [SA-1:0][DATA_W-1:0] wr_data
);
  import strassen_pkg::*;
  typedef logic [SA-1:0][DATA_W-1:0] word_t;

  word_t mem [16][DEPTH];

  // ---------------- accumulation -----------------
  logic [5:0]                t;
  logic [$clog2(MP/SA+1)-1:0] it;
  logic [$clog2(NW+1)-1:0]   jt;
  logic [$clog2(SA+1)-1:0]   r;
  logic [BAW-1:0]            acc_addr;
  coef_t                     coef [16];

  assign acc_addr = BAW'((it * SA + r) * NW + jt);
  always_comb begin
    for (int c = 0; c < 16; c++) coef[c] = s2_out(int'(t), c);
  end

  logic last_word;
  assign last_word = (r == SA - 1) && (jt == NW - 1) && (it == MP / SA - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; it <= '0; jt <= '0; r <= '0; acc_done <= 1'b0;
    end else begin
      acc_done <= 1'b0;
      if (m_valid) begin
        if (r == SA - 1) begin
          r <= '0;
          if (jt == NW - 1) begin
            jt <= '0;
            if (it == MP / SA - 1) it <= '0;
            else                   it <= it + 1'b1;
          end else begin
            jt <= jt + 1'b1;
          end
        end else begin
          r <= r + 1'b1;
        end
        if (last_word) begin
          if (t == 6'(NPROD - 1)) begin
            t        <= '0;
            acc_done <= 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end
      end
    end
  end

  // ---------------- clear after reset -----------------
  logic           init_busy;
  logic [BAW-1:0] init_addr;
  assign ready = !init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_addr <= '0;
    end else if (init_busy) begin
      init_addr <= init_addr + 1'b1;
      if (init_addr == BAW'(DEPTH - 1)) init_busy <= 1'b0;
    end
  end

  // ---------------- write-back -----------------
  typedef enum logic [1:0] { WB_IDLE, WB_REQ, WB_DATA } wb_state_t;
  wb_state_t                  wb_state;
  logic [$clog2(4*MP+1)-1:0]  wb_row;   // block row 0..4*MP-1
  logic [$clog2(4*NW+1)-1:0]  wb_w;     // word in the row 0..4*NW-1
  logic [AW-1:0]              row_addr;
  logic [3:0]                 wb_bank;
  logic [BAW-1:0]             wb_baddr;
  logic                       wb_take;

  assign wb_bank       = 4'((wb_row / MP) * 4 + wb_w / NW);
  assign wb_baddr      = BAW'((wb_row % MP) * NW + wb_w % NW);
  assign wb_busy       = (wb_state != WB_IDLE);
  assign wr_req_valid  = (wb_state == WB_REQ);
  assign wr_req_addr   = row_addr;
  assign wr_req_len    = 16'(4 * NW);
  assign wr_data_valid = (wb_state == WB_DATA);
  assign wr_data       = mem[wb_bank][wb_baddr];
  assign wb_take       = wr_data_valid && wr_data_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_state <= WB_IDLE; wb_row <= '0; wb_w <= '0; row_addr <= '0; wb_done <= 1'b0;
    end else begin
      wb_done <= 1'b0;
      case (wb_state)
        WB_IDLE: if (wb_start) begin
          wb_state <= WB_REQ;
          wb_row   <= '0;
          wb_w     <= '0;
          row_addr <= wb_addr;
        end
        WB_REQ: if (wr_req_ready) wb_state <= WB_DATA;
        WB_DATA: if (wb_take) begin
          if (wb_w == 4 * NW - 1) begin
            wb_w     <= '0;
            row_addr <= row_addr + wb_stride;
            if (wb_row == 4 * MP - 1) begin
              wb_state <= WB_IDLE;
              wb_done  <= 1'b1;
            end else begin
              wb_row   <= wb_row + 1'b1;
              wb_state <= WB_REQ;
            end
          end else begin
            wb_w <= wb_w + 1'b1;
          end
        end
        default: wb_state <= WB_IDLE;
      endcase
    end
  end

  // ---------------- storage -----------------
  always_ff @(posedge clk) begin
    if (init_busy) begin
      for (int c = 0; c < 16; c++) mem[c][init_addr] <= '0;
    end else if (wb_take) begin
      mem[wb_bank][wb_baddr] <= '0;
    end else if (m_valid) begin
      for (int c = 0; c < 16; c++) begin
        for (int e = 0; e < SA; e++) begin
          if (coef[c] == 2'sd1)       mem[c][acc_addr][e] <= mem[c][acc_addr][e] + m_data[e];
          else if (coef[c] == -2'sd1) mem[c][acc_addr][e] <= mem[c][acc_addr][e] - m_data[e];
        end
      end
    end
  end

  a_no_acc_during_wb: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid |-> (wb_state == WB_IDLE) && !init_busy);
endmodule
