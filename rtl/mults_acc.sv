// mults_acc: loosely coupled accelerator multiplying a matrix by its own
// transpose.
//
// Configuration registers: 0 = input word index, 1 = output word index,
// 2 = number of rows R, 3 = number of columns C. The input A is R x C and the
// output A * A^T is R x R, both row-major, one signed Q32.32 value per word.
// Element (i, j) is the sum over k of A[i][k] * A[j][k], each product rounded
// down to Q32.32 before it is added (wrap-around on overflow).
//
// The PLMs hold at most (a chunk of) two rows: for every output element the
// accelerator loads up to BURST words of row i and of row j, multiplies and
// accumulates them one pair per cycle, and repeats over the column chunks.
// When a whole row fits (C <= BURST) row i is loaded only once per output
// row. Results collect in an output PLM and leave in store bursts of up to
// BURST words, so one output row needs every input row to be read. The PLMs
// are zeroed at every invocation; `done` pulses once at the end.
// The function, the word format and the two-row PLM follow the paper; the
// loop order, the row-i reuse and the sequential phases are this design's.
module mults_acc
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
    S_IDLE, S_CLR, S_CLRW, S_ROW, S_PAIR, S_CHUNK, S_LREQ_A, S_LOAD_A,
    S_LREQ_B, S_LOAD_B, S_MAC, S_PAIR_END, S_SREQ, S_STORE, S_DONE
  } state_t;
  state_t state;

  idx_t src, dst, rows, cols;
  idx_t i, j, c0, w;
  idx_t a_base, b_base, d_base, jstart;
  idx_t ob;               // results waiting in the output PLM
  logic a_loaded;
  word_t acc;
  logic [AW:0]   k;
  logic          mac_v;
  logic          plm_clr, a_busy, b_busy, o_busy;

  logic          a_we, b_we, o_we;
  logic [AW-1:0] a_raddr, b_raddr, o_waddr, o_raddr, ld_waddr;
  word_t         a_rdata, b_rdata, o_rdata;

  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_a (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(a_busy),
    .we(a_we), .waddr(ld_waddr), .wdata(rd_data), .raddr(a_raddr), .rdata(a_rdata)
  );
  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_b (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(b_busy),
    .we(b_we), .waddr(ld_waddr), .wdata(rd_data), .raddr(b_raddr), .rdata(b_rdata)
  );
  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_out (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(o_busy),
    .we(o_we), .waddr(o_waddr), .wdata(acc), .raddr(o_raddr), .rdata(o_rdata)
  );

  wire rd_fire = rd_valid && rd_ready;
  wire wr_fire = wr_valid && wr_ready;
  wire last_j  = (j + 1 == rows);

  assign rd_req_valid = (state == S_LREQ_A) || (state == S_LREQ_B);
  assign rd_req       = '{index: ((state == S_LREQ_A) ? a_base : b_base) + c0, length: w};
  assign rd_ready     = (state == S_LOAD_A) || (state == S_LOAD_B);
  assign a_we         = rd_fire && (state == S_LOAD_A);
  assign b_we         = rd_fire && (state == S_LOAD_B);
  assign ld_waddr     = k[AW-1:0];
  assign a_raddr      = k[AW-1:0];
  assign b_raddr      = k[AW-1:0];

  assign o_we    = (state == S_PAIR_END);
  assign o_waddr = ob[AW-1:0];
  assign o_raddr = (state == S_STORE && wr_fire) ? AW'(k + 1'b1) : k[AW-1:0];

  assign wr_req_valid = (state == S_SREQ);
  assign wr_req       = '{index: d_base + jstart, length: ob};
  assign wr_valid     = (state == S_STORE);
  assign wr_data      = o_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      src      <= '0;
      dst      <= '0;
      rows     <= '0;
      cols     <= '0;
      i        <= '0;
      j        <= '0;
      c0       <= '0;
      w        <= '0;
      a_base   <= '0;
      b_base   <= '0;
      d_base   <= '0;
      jstart   <= '0;
      ob       <= '0;
      a_loaded <= 1'b0;
      acc      <= '0;
      k        <= '0;
      mac_v    <= 1'b0;
      plm_clr  <= 1'b0;
      done     <= 1'b0;
    end else begin
      plm_clr <= 1'b0;
      done    <= 1'b0;
      mac_v   <= 1'b0;
      if (mac_v) acc <= acc + fx_mul(a_rdata, b_rdata);
      unique case (state)
        S_IDLE: if (conf_done) begin
          src     <= conf[0][IDX_W-1:0];
          dst     <= conf[1][IDX_W-1:0];
          rows    <= conf[2][IDX_W-1:0];
          cols    <= conf[3][IDX_W-1:0];
          plm_clr <= 1'b1;
          state   <= S_CLR;
        end
        S_CLR:  state <= S_CLRW;
        S_CLRW: if (!a_busy && !b_busy && !o_busy) begin
          i      <= '0;
          a_base <= src;
          d_base <= dst;
          state  <= (rows == '0 || cols == '0) ? S_DONE : S_ROW;
        end
        S_ROW: begin
          j        <= '0;
          b_base   <= src;
          jstart   <= '0;
          ob       <= '0;
          a_loaded <= 1'b0;
          state    <= S_PAIR;
        end
        S_PAIR: begin
          c0    <= '0;
          acc   <= '0;
          state <= S_CHUNK;
        end
        S_CHUNK: begin
          w     <= (cols - c0 > idx_t'(BURST)) ? idx_t'(BURST) : cols - c0;
          state <= a_loaded ? S_LREQ_B : S_LREQ_A;
        end
        S_LREQ_A: if (rd_req_ready) begin
          k     <= '0;
          state <= S_LOAD_A;
        end
        S_LOAD_A: if (rd_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == w - 1) state <= S_LREQ_B;
        end
        S_LREQ_B: if (rd_req_ready) begin
          k     <= '0;
          state <= S_LOAD_B;
        end
        S_LOAD_B: if (rd_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == w - 1) begin
            k     <= '0;
            state <= S_MAC;
          end
        end
        S_MAC: begin
          if (idx_t'(k) < w) begin
            mac_v <= 1'b1;
            k     <= k + 1'b1;
          end else if (!mac_v) begin
            k <= '0;
            if (c0 + w >= cols) begin
              a_loaded <= (w == cols);
              state    <= S_PAIR_END;
            end else begin
              c0    <= c0 + w;
              state <= S_CHUNK;
            end
          end
        end
        S_PAIR_END: begin
          ob <= ob + 1;
          if (ob + 1 == idx_t'(BURST) || last_j) state <= S_SREQ;
          else begin
            j      <= j + 1;
            b_base <= b_base + cols;
            state  <= S_PAIR;
          end
        end
        S_SREQ: if (wr_req_ready) begin
          k     <= '0;
          state <= S_STORE;
        end
        S_STORE: if (wr_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == ob - 1) begin
            k      <= '0;
            jstart <= jstart + ob;
            ob     <= '0;
            if (!last_j) begin
              j      <= j + 1;
              b_base <= b_base + cols;
              state  <= S_PAIR;
            end else if (i + 1 == rows) begin
              state <= S_DONE;
            end else begin
              i      <= i + 1;
              a_base <= a_base + cols;
              d_base <= d_base + rows;
              state  <= S_ROW;
            end
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

endmodule
