// store_shell: the write side of the DIFT shell.
//
// A write request of `length` data words at logical index `index` is rewritten
// with the same mapping as the load side, so that the tag positions of the
// output region follow the configured first-tag location and tag offset. While
// the burst streams out, the shell inserts a dst_tag word at every tag
// position and passes the accelerator's data words in between, which marks the
// output with the tag value chosen by the caller. Once `violation` is raised
// by the load side, no accelerator data reaches memory any more: a burst in
// flight is completed with zero words (so that the memory-side transaction
// closes) and new requests are refused. The padding runs to the end of the
// burst even if the next invocation starts (and `violation` falls) first.
//
// Interface: valid/ready on every channel. Timing: one word per cycle, a
// burst of L data words takes L plus its tag count cycles on the memory side.
// Tag insertion follows the shell description; the output sharing the input's
// tag layout and the zero padding on violation are this design's choices.
module store_shell
  import dift_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       violation,
  input  word_t      dst_tag,
  input  idx_t       first_tag,
  input  logic [4:0] lg_off,
  // accelerator side
  input  logic       acc_req_valid,
  output logic       acc_req_ready,
  input  dma_req_t   acc_req,
  input  logic       acc_data_valid,
  output logic       acc_data_ready,
  input  word_t      acc_data,
  // memory side
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dma_req_t   mem_req,
  output logic       mem_data_valid,
  input  logic       mem_data_ready,
  output word_t      mem_data,
  // number of tag words written since reset (for observation)
  output idx_t       tags_written
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_STREAM} state_t;
  state_t state;

  idx_t remaining;
  idx_t to_tag;
  idx_t period;

  assign period = idx_t'(1) << lg_off;

  logic flush;       // the burst in flight belongs to a stopped run

  wire is_tag = (to_tag == '0);
  wire drop   = violation || flush;

  assign acc_req_ready  = (state == S_IDLE) && enable && !violation;
  assign mem_req_valid  = (state == S_REQ);
  assign acc_data_ready = (state == S_STREAM) && !is_tag && !drop && mem_data_ready;
  assign mem_data_valid = (state == S_STREAM) && (is_tag || drop || acc_data_valid);
  assign mem_data       = drop ? '0 : (is_tag ? dst_tag : acc_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      remaining    <= '0;
      to_tag       <= '0;
      mem_req      <= '0;
      tags_written <= '0;
      flush        <= 1'b0;
    end else begin
      if (violation && state != S_IDLE) flush <= 1'b1;
      unique case (state)
        S_IDLE: if (acc_req_valid && acc_req_ready) begin
          mem_req.index  <= data_to_phys(acc_req.index, first_tag, lg_off);
          mem_req.length <= phys_length(acc_req.index, acc_req.length, first_tag, lg_off);
          remaining      <= phys_length(acc_req.index, acc_req.length, first_tag, lg_off);
          to_tag         <= data_before_tag(acc_req.index, first_tag, lg_off);
          state          <= S_REQ;
        end
        S_REQ: if (mem_req_ready) state <= S_STREAM;
        S_STREAM: if (mem_data_valid && mem_data_ready) begin
          if (is_tag) begin
            to_tag       <= period;
            tags_written <= tags_written + 1'b1;
          end else begin
            to_tag <= to_tag - 1'b1;
          end
          remaining <= remaining - 1'b1;
          if (remaining == idx_t'(1)) begin
            state <= S_IDLE;
            flush <= 1'b0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
                               acc_req_valid && acc_req_ready |-> acc_req.length != '0);
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_req_valid && !mem_req_ready |=> $stable(mem_req));

endmodule
