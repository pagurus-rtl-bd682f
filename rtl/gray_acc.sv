// gray_acc: loosely coupled accelerator converting an RGB image to grayscale.
//
// Configuration registers: 0 = input word index, 1 = output word index,
// 2 = number of pixels. Each input word holds one pixel as three 16-bit
// integers (R in bits 15:0, G in 31:16, B in 47:32); each output word is the
// luminance as a signed Q32.32 fixed-point number,
//   gray = (19595*R + 38470*G + 7471*B) / 65536,
// i.e. the 0.299/0.587/0.114 weights scaled by 2**16, so the Q32.32 result is
// the weighted sum shifted left by 16 and is exact.
//
// It works in bursts of up to BURST pixels: a load burst fills the input PLM
// over DMA, the compute phase fills the output PLM (one pixel per cycle), and
// a store burst writes the output PLM back. One load burst gives one store
// burst, so the accelerator streams. Both PLMs are zeroed at every invocation
// before the first burst. `done` pulses for one cycle at the end.
// Timing per burst of L pixels with no DMA stalls: about L cycles of load,
// L+1 of compute and L of store, plus a request cycle for each transfer.
// The function, the word formats and the burst structure follow the paper;
// the luminance weights, the pixel packing and the sequential (not
// pipelined) phases are this design's choices.
module gray_acc
  import dift_pkg::*;
#(
  parameter int unsigned BURST = 1024,
  localparam int unsigned N_REGS = 3,
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
    S_IDLE, S_CLR, S_CLRW, S_LREQ, S_LOAD, S_COMP, S_SREQ, S_STORE, S_DONE
  } state_t;
  state_t state;

  idx_t src, dst, npix, pos, len;
  logic [AW:0] k;           // word counter inside a burst
  logic        comp_v;      // compute pipeline: read issued last cycle
  logic [AW-1:0] comp_k;
  logic        plm_clr, in_busy, out_busy;

  logic          in_we, out_we;
  logic [AW-1:0] in_waddr, in_raddr, out_waddr, out_raddr;
  word_t         in_wdata, in_rdata, out_wdata, out_rdata;

  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_in (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(in_busy),
    .we(in_we), .waddr(in_waddr), .wdata(in_wdata), .raddr(in_raddr), .rdata(in_rdata)
  );
  plm #(.DEPTH(BURST), .WIDTH(WORD_W)) u_plm_out (
    .clk, .rst_n, .clr(plm_clr), .clr_busy(out_busy),
    .we(out_we), .waddr(out_waddr), .wdata(out_wdata), .raddr(out_raddr), .rdata(out_rdata)
  );

  function automatic word_t luminance(word_t px);
    logic [63:0] s;
    s = 64'(px[15:0]) * 64'd19595 + 64'(px[31:16]) * 64'd38470 + 64'(px[47:32]) * 64'd7471;
    return s << 16;
  endfunction

  wire rd_fire = rd_valid && rd_ready;
  wire wr_fire = wr_valid && wr_ready;

  // DMA requests
  assign rd_req_valid = (state == S_LREQ);
  assign rd_req       = '{index: src + pos, length: len};
  assign wr_req_valid = (state == S_SREQ);
  assign wr_req       = '{index: dst + pos, length: len};

  // load: stream into the input PLM
  assign rd_ready = (state == S_LOAD);
  assign in_we    = rd_fire;
  assign in_waddr = k[AW-1:0];
  assign in_wdata = rd_data;

  // compute: read input word k, write its luminance one cycle later
  assign in_raddr  = k[AW-1:0];
  assign out_we    = comp_v;
  assign out_waddr = comp_k[AW-1:0];
  assign out_wdata = luminance(in_rdata);

  // store: out_rdata always holds word k (read address runs one ahead on a transfer)
  assign wr_valid  = (state == S_STORE);
  assign wr_data   = out_rdata;
  assign out_raddr = (state == S_STORE && wr_fire) ? AW'(k + 1'b1) : k[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      src     <= '0;
      dst     <= '0;
      npix    <= '0;
      pos     <= '0;
      len     <= '0;
      k       <= '0;
      comp_v  <= 1'b0;
      comp_k  <= '0;
      plm_clr <= 1'b0;
      done    <= 1'b0;
    end else begin
      plm_clr <= 1'b0;
      done    <= 1'b0;
      comp_v  <= 1'b0;
      unique case (state)
        S_IDLE: if (conf_done) begin
          src     <= conf[0][IDX_W-1:0];
          dst     <= conf[1][IDX_W-1:0];
          npix    <= conf[2][IDX_W-1:0];
          pos     <= '0;
          plm_clr <= 1'b1;
          state   <= S_CLR;
        end
        S_CLR:  state <= S_CLRW;
        S_CLRW: if (!in_busy && !out_busy) begin
          if (npix == '0) state <= S_DONE;
          else begin
            len   <= (npix > idx_t'(BURST)) ? idx_t'(BURST) : npix;
            state <= S_LREQ;
          end
        end
        S_LREQ: if (rd_req_ready) begin
          k     <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (rd_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == len - 1) begin
            k     <= '0;
            state <= S_COMP;
          end
        end
        S_COMP: begin
          if (idx_t'(k) < len) begin
            comp_v <= 1'b1;
            comp_k <= k[AW-1:0];
            k      <= k + 1'b1;
          end else if (!comp_v) begin
            k     <= '0;
            state <= S_SREQ;
          end
        end
        S_SREQ: if (wr_req_ready) state <= S_STORE;
        S_STORE: if (wr_fire) begin
          k <= k + 1'b1;
          if (idx_t'(k) == len - 1) begin
            k   <= '0;
            pos <= pos + len;
            if (pos + len >= npix) state <= S_DONE;
            else begin
              len   <= (npix - pos - len > idx_t'(BURST)) ? idx_t'(BURST) : npix - pos - len;
              state <= S_LREQ;
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
