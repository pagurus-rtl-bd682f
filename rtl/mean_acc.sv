// mean_acc: loosely coupled accelerator computing the arithmetic mean of
// every column of a matrix.
//
// Configuration registers: 0 = input word index, 1 = output word index,
// 2 = number of rows, 3 = number of columns. The matrix is stored row-major,
// one signed Q32.32 fixed-point value per word; the output is one Q32.32 mean
// per column (sum of the column divided by the number of rows, truncated
// toward zero).
//
// The columns are processed in chunks of up to BURST. For one chunk the
// accelerator issues one load burst per row (the chunk's part of that row),
// adds it into an accumulator PLM (one word per cycle), and after the last
// row divides each sum by the row count with a sequential divider (about 67
// cycles per column) and writes the chunk's means with one store burst. So
// many load bursts produce one store burst, which is what makes a tag
// violation likely to be seen before any output of the chunk leaves. Both
// PLMs are zeroed at every invocation; `done` pulses once at the end.
// The function, the word format and the burst pattern follow the paper; the
// chunking order, the divider and the sequential phases are this design's.
module mean_acc
  import dift_pkg::*;
#(
  parameter int unsigned BURST = 1024,
  localparam int unsigned N_REGS = 4,
  localparam int unsigned AW = $clog2(BURST)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     conf_done,
  input  word_t    conf [N_REGS],
  output logic     done,
  output logic     rd_req_valid,
  input  logic     rd_req_ready,
  output dma_req_t rd_req,
  input  logic     rd_valid,
  output logic     rd_ready,
  input  word_t    rd_data,
  output logic     wr_req_valid,
  input  logic     wr_req_ready,
  output dma_req_t wr_req,
  output logic     wr_valid,
  input  logic     wr_ready,
  output word_t    wr_data
);

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_CLRW, S_CHUNK, S_LREQ, S_LOAD, S_ACC,
    S_DIV_RD, S_DIV_ST, S_DIV_WT, S_SREQ, S_STORE, S_DONE
  } state_t;
  state_t state;

  idx_t src, dst, rows, cols;
  idx_t c0, w, r, row_base;
  logic [AW:0]   k;
  logic          acc_v;
  logic [AW-1:0] acc_k;
  logic          plm_clr, in_busy, sum_busy;

  logic          in_we, sum_we;
  logic [AW-1:0] in_waddr, in_raddr, sum_waddr, sum_raddr;
  word_t         in_wdata, in_rdata, sum_wdata, sum_rdata;

  logic          div_start, div_busy, div_valid;
  logic signed [WORD_W-1:0] div_q;

  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_in (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(in_busy),
    .we(in_we), .waddr(in_waddr), .wdata(in_wdata), .raddr(in_raddr), .rdata(in_rdata)
  );
  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_sum (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(sum_busy),
    .we(sum_we), .waddr(sum_waddr), .wdata(sum_wdata), .raddr(sum_raddr), .rdata(sum_rdata)
  );

  seq_div #(.DW(WORD_W), .VW(IDX_W)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(sum_rdata), .divisor(rows),
    .busy(div_busy), .valid(div_valid), .quotient(div_q)
  );

  wire rd_fire = rd_valid && rd_ready;
  wire wr_fire = wr_valid && wr_ready;

  assign rd_req_valid = (state == S_LREQ);
  assign rd_req       = '{index: row_base, length: w};
  assign wr_req_valid = (state == S_SREQ);
  assign wr_req       = '{index: dst + c0, length: w};

  assign rd_ready = (state == S_LOAD);
  assign in_we    = rd_fire;
  assign in_waddr = k[AW-1:0];
  assign in_wdata = rd_data;
  assign in_raddr = k[AW-1:0];

  // accumulate (first row overwrites), or write back a quotient
  assign sum_we    = acc_v || (state == S_DIV_WT && div_valid);
  assign sum_waddr = acc_v ? acc_k : k[AW-1:0];
  assign sum_wdata = acc_v ? ((r == '0) ? in_rdata : in_rdata + sum_rdata) : div_q;
  assign sum_raddr = (state == S_STORE && wr_fire) ? AW'(k + 1'b1) : k[AW-1:0];

  assign div_start = (state == S_DIV_ST);

  assign wr_valid = (state == S_STORE);
  assign wr_data  = sum_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      src      <= '0;
      dst      <= '0;
      rows     <= '0;
      cols     <= '0;
      c0       <= '0;
      w        <= '0;
      r        <= '0;
      row_base <= '0;
      k        <= '0;
      acc_v    <= 1'b0;
      acc_k    <= '0;
      plm_clr  <= 1'b0;
      done     <= 1'b0;
    end else begin
      plm_clr <= 1'b0;
      done    <= 1'b0;
      acc_v   <= 1'b0;
      unique case (state)
        S_IDLE: if (conf_done) begin
          src     <= conf[0][IDX_W-1:0];
          dst     <= conf[1][IDX_W-1:0];
          rows    <= conf[2][IDX_W-1:0];
          cols    <= conf[3][IDX_W-1:0];
          c0      <= '0;
          plm_clr <= 1'b1;
          state   <= S_CLR;
        end
        S_CLR:  state <= S_CLRW;
        S_CLRW: if (!in_busy && !sum_busy)
          state <= (rows == '0 || cols == '0) ? S_DONE : S_CHUNK;
        S_CHUNK: begin
          w        <= (cols - c0 > idx_t'(BURST)) ? idx_t'(BURST) : cols - c0;
          r        <= '0;
          row_base <= src + c0;
          state    <= S_LREQ;
        end
        S_LREQ: if (rd_req_ready) begin
          k     <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (rd_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == w - 1) begin
            k     <= '0;
            state <= S_ACC;
          end
        end
        S_ACC: begin
          if (idx_t'(k) < w) begin
            acc_v <= 1'b1;
            acc_k <= k[AW-1:0];
            k     <= k + 1'b1;
          end else if (!acc_v) begin
            k <= '0;
            if (r + 1 == rows) state <= S_DIV_RD;
            else begin
              r        <= r + 1;
              row_base <= row_base + cols;
              state    <= S_LREQ;
            end
          end
        end
        S_DIV_RD: state <= S_DIV_ST;
        S_DIV_ST: state <= S_DIV_WT;
        S_DIV_WT: if (div_valid) begin
          k <= k + 1'b1;
          if (idx_t'(k) == w - 1) begin
            k     <= '0;
            state <= S_SREQ;
          end else state <= S_DIV_RD;
        end
        S_SREQ: if (wr_req_ready) state <= S_STORE;
        S_STORE: if (wr_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == w - 1) begin
            k  <= '0;
            c0 <= c0 + w;
            state <= (c0 + w >= cols) ? S_DONE : S_CHUNK;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The divider is only started when idle.
  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);

endmodule
