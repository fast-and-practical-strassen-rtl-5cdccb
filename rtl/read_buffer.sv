// read_buffer: "Read/Buffer A, B (4x4)" - loads one 4x4 block of submatrices of
// an input matrix from external memory into on-chip buffers and serves them to
// the LHS/RHS computation.
//
// A block is 4*SUB_R rows by 4*SUB_C columns of the row-major matrix in
// external memory.  Memory words hold SA elements of DATA_W bits.  After a
// start pulse the loader issues one burst read per block row, 4*SUB_C/SA words
// long (the paper's bursts of length 4k' for A and 4n' for B), at
// base_addr + row*stride, where stride is the matrix row length in words.
// Responses arrive in order, one word per cycle at most, and are always
// accepted; each is written into one of 16 banks, bank 4*(row/SUB_R) +
// (col/SUB_C), that is one bank per submatrix, at the row-major word offset of
// the word inside its submatrix.  done pulses for one cycle after the last
// word is stored.
//
// Read port: buf_addr selects a word offset inside a submatrix; one cycle later
// buf_data holds that word of all 16 submatrices, so the LHS/RHS logic can add
// up to four submatrices in one cycle.  Holding each submatrix in its own bank
// follows the paper; the bank layout, the request/response handshake and the
// synchronous read are this design's choices.
module read_buffer #(
  parameter int unsigned SA     = 16,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned SUB_R  = 64,
  parameter int unsigned SUB_C  = 64,
  parameter int unsigned AW     = 32,
  localparam int unsigned SUBW  = SUB_C / SA,          // words per submatrix row
  localparam int unsigned DEPTH = SUB_R * SUBW,        // words per submatrix
  localparam int unsigned BAW   = $clog2(DEPTH)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [AW-1:0]                  base_addr,
  input  logic [AW-1:0]                  stride,
  output logic                           busy,
  output logic                           done,
  // burst read requests to external memory
  output logic                           rd_req_valid,
  input  logic                           rd_req_ready,
  output logic [AW-1:0]                  rd_req_addr,
  output logic [15:0]                    rd_req_len,
  // read data from external memory, in request order
  input  logic                           rd_resp_valid,
  input  logic [SA-1:0][DATA_W-1:0]      rd_resp_data,
  // buffer read port (one cycle latency)
  input  logic [BAW-1:0]                 buf_addr,
  output logic [15:0][SA-1:0][DATA_W-1:0] buf_data
);
  typedef logic [SA-1:0][DATA_W-1:0] word_t;

  word_t mem [16][DEPTH];

  // request side
  logic [$clog2(4*SUB_R+1)-1:0] req_rows;   // rows still to request
  // response side: position of the next word
  logic [$clog2(SUB_R)-1:0]     r_in;       // row inside submatrix
  logic [1:0]                   r_sub;      // submatrix row
  logic [$clog2(SUBW+1)-1:0]    w_in;       // word inside submatrix row
  logic [1:0]                   w_sub;      // submatrix column
  logic                         rx_active;

  assign busy        = rx_active;
  assign rd_req_valid = (req_rows != 0);
  assign rd_req_len  = 16'(4 * SUBW);

  logic last_word;
  assign last_word = (w_sub == 2'd3) && (w_in == SUBW - 1) && (r_sub == 2'd3) &&
                     (r_in == SUB_R - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_rows    <= '0;
      rd_req_addr <= '0;
      r_in <= '0; r_sub <= '0; w_in <= '0; w_sub <= '0;
      rx_active <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !rx_active) begin
        req_rows    <= ($bits(req_rows))'(4 * SUB_R);
        rd_req_addr <= base_addr;
        r_in <= '0; r_sub <= '0; w_in <= '0; w_sub <= '0;
        rx_active <= 1'b1;
      end else begin
        if (rd_req_valid && rd_req_ready) begin
          req_rows    <= req_rows - 1'b1;
          rd_req_addr <= rd_req_addr + stride;
        end
        if (rx_active && rd_resp_valid) begin
          if (last_word) begin
            rx_active <= 1'b0;
            done      <= 1'b1;
          end
          if (w_in == SUBW - 1) begin
            w_in <= '0;
            if (w_sub == 2'd3) begin
              w_sub <= '0;
              if (r_in == SUB_R - 1) begin
                r_in  <= '0;
                r_sub <= r_sub + 1'b1;
              end else begin
                r_in <= r_in + 1'b1;
              end
            end else begin
              w_sub <= w_sub + 1'b1;
            end
          end else begin
            w_in <= w_in + 1'b1;
          end
        end
      end
    end
  end

  // storage: one bank per submatrix
  logic [3:0]     wr_bank;
  logic [BAW-1:0] wr_addr;
  assign wr_bank = {r_sub, w_sub};
  assign wr_addr = BAW'(r_in * SUBW + w_in);

  always_ff @(posedge clk) begin
    if (rx_active && rd_resp_valid) mem[wr_bank][wr_addr] <= rd_resp_data;
    for (int b = 0; b < 16; b++) buf_data[b] <= mem[b][buf_addr];
  end

  a_resp_only_when_loading: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> rx_active);
endmodule
