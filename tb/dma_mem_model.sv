// dma_mem_model: behavioural model of main memory behind a DMA engine, for
// simulation only.
//
// It serves one read burst and one write burst at a time on independent
// channels, with the same valid/ready request and data channels the
// accelerators and the shell use. With STALL_PCT > 0 it randomly withholds
// request acceptance, read data and write acceptance in that percentage of
// cycles, to exercise back-pressure. The array `mem` is read and written
// directly by the testbenches. Accesses outside DEPTH are counted in
// `oob_count`; bursts are counted in `rd_bursts` and `wr_bursts`.
module dma_mem_model
  import dift_pkg::*;
#(
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rd_req_valid,
  output logic     rd_req_ready,
  input  dma_req_t rd_req,
  output logic     rd_valid,
  input  logic     rd_ready,
  output word_t    rd_data,
  input  logic     wr_req_valid,
  output logic     wr_req_ready,
  input  dma_req_t wr_req,
  input  logic     wr_valid,
  output logic     wr_ready,
  input  word_t    wr_data
);

  word_t mem [DEPTH];
  int unsigned oob_count, rd_bursts, wr_bursts;

  idx_t rd_ptr, rd_left, wr_ptr, wr_left;
  logic go_rq, go_rd, go_wq, go_wr;

  function automatic logic pass();
    return (STALL_PCT == 0) || ($urandom_range(99) >= STALL_PCT);
  endfunction

  always @(negedge clk) begin
    go_rq <= pass();
    go_rd <= pass();
    go_wq <= pass();
    go_wr <= pass();
  end

  assign rd_req_ready = (rd_left == 0) && go_rq;
  assign rd_valid     = (rd_left != 0) && go_rd;
  assign rd_data      = (rd_ptr < DEPTH) ? mem[rd_ptr] : '0;
  assign wr_req_ready = (wr_left == 0) && go_wq;
  assign wr_ready     = (wr_left != 0) && go_wr;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; rd_left <= '0; wr_ptr <= '0; wr_left <= '0;
      oob_count <= 0; rd_bursts <= 0; wr_bursts <= 0;
    end else begin
      if (rd_req_valid && rd_req_ready) begin
        rd_ptr    <= rd_req.index;
        rd_left   <= rd_req.length;
        rd_bursts <= rd_bursts + 1;
      end else if (rd_valid && rd_ready) begin
        if (rd_ptr >= DEPTH) oob_count <= oob_count + 1;
        rd_ptr  <= rd_ptr + 1;
        rd_left <= rd_left - 1;
      end
      if (wr_req_valid && wr_req_ready) begin
        wr_ptr    <= wr_req.index;
        wr_left   <= wr_req.length;
        wr_bursts <= wr_bursts + 1;
      end else if (wr_valid && wr_ready) begin
        if (wr_ptr < DEPTH) mem[wr_ptr] <= wr_data;
        else oob_count <= oob_count + 1;
        wr_ptr  <= wr_ptr + 1;
        wr_left <= wr_left - 1;
      end
    end
  end

endmodule
