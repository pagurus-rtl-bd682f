// load_shell: the read side of the DIFT shell.
//
// It sits between the accelerator's DMA read port and the memory's. A read
// request for `length` data words from logical index `index` is rewritten to
// cover the interleaved tags (indices are word offsets into the accelerator's
// buffer, and tags are laid out over that whole buffer from offset 0): the
// start moves to the data word's physical position and the length grows by
// the tags inside the span (and the tag that
// directly follows the last data word, if any). While the burst streams back,
// tag words are checked against src_tag and dropped; data words are passed to
// the accelerator unchanged. On the first mismatching tag the shell raises
// `violation` (sticky until `clear`), forwards nothing more, drains the rest of
// the memory burst and accepts no further requests. A burst cut short this way
// is drained to its end even if the next invocation starts (and `clear`
// lowers `violation`) before it is over: its words are dropped unchecked and
// the new run's first request is taken only after it.
//
// Interface: valid/ready handshakes on every channel. Timing: a request is
// taken in one cycle and issued to memory in the next; data and tags then flow
// at one word per cycle when neither side stalls, so a burst of L words costs
// L plus its tag count in transfer cycles. The request rewriting and the
// tag check follow the shell description; the power-of-two tag offset, the
// tag-after-last-word rule and the drain on violation are this design's
// choices.
module load_shell
  import dift_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // configuration (stable while enabled)
  input  logic       enable,     // accelerator running
  input  logic       clear,      // start of a new invocation
  input  word_t      src_tag,
  input  idx_t       first_tag,  // data words before the first tag
  input  logic [4:0] lg_off,     // tag offset = 2**lg_off data words
  output logic       violation,
  // accelerator side
  input  logic       acc_req_valid,
  output logic       acc_req_ready,
  input  dma_req_t   acc_req,
  output logic       acc_data_valid,
  input  logic       acc_data_ready,
  output word_t      acc_data,
  // memory side
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dma_req_t   mem_req,
  input  logic       mem_data_valid,
  output logic       mem_data_ready,
  input  word_t      mem_data
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_STREAM} state_t;
  state_t state;

  idx_t remaining;   // physical words still to come in this burst
  idx_t to_tag;      // data words before the next tag word
  idx_t period;

  assign period = idx_t'(1) << lg_off;

  logic flush;       // the burst in flight belongs to a stopped run

  wire is_tag = (to_tag == '0);
  wire drop   = violation || flush;

  assign acc_req_ready  = (state == S_IDLE) && enable && !violation;
  assign mem_req_valid  = (state == S_REQ);
  assign acc_data_valid = (state == S_STREAM) && mem_data_valid && !is_tag && !drop;
  assign acc_data       = mem_data;
  assign mem_data_ready = (state == S_STREAM) && (is_tag || drop || acc_data_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
      to_tag    <= '0;
      mem_req   <= '0;
      violation <= 1'b0;
      flush     <= 1'b0;
    end else begin
      if (clear) violation <= 1'b0;
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
            to_tag <= period;
            if (mem_data != src_tag && !drop) violation <= 1'b1;
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

  // A burst must carry at least one word.
  a_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
                               acc_req_valid && acc_req_ready |-> acc_req.length != '0);
  // The memory keeps its request stable until it is taken.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_req_valid && !mem_req_ready |=> $stable(mem_req));

endmodule
