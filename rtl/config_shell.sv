// config_shell: the memory-mapped configuration side of the DIFT shell.
//
// It holds the accelerator's N configuration registers, one tag register per
// configuration register, src_tag (tag value expected on the inputs and on the
// configuration registers), dst_tag (tag value written with the outputs), the
// location of the first interleaved tag and the tag offset. A write of 1 to
// the command register starts an invocation: the shell first compares every
// configuration register's tag with src_tag and refuses to start on a
// mismatch; otherwise it pulses `clear` to the load side and `conf_done` to the
// accelerator, and runs until the accelerator reports `acc_done` or the load
// side reports a tag violation. On a violation the accelerator is held in
// reset (`acc_rst_n` low) until the next start, which stops it at once. Either
// way `irq` pulses for one cycle and the status register records the outcome.
//
// Register map (word addresses):
//   0 .. N-1        accelerator configuration registers
//   N .. 2N-1       their tags
//   2N              src_tag
//   2N+1            dst_tag
//   2N+2            first_tag   (data words before the first tag)
//   2N+3            lg_off      (tag offset = 2**lg_off data words)
//   2N+4            command     (write 1: start; reads 0)
//   2N+5            status      (read only: bit0 done, bit1 input tag
//                                violation, bit2 register tag violation,
//                                bit3 busy)
// The 2N+2 registers and the first-tag register follow the shell description;
// the tag-offset, command and status registers, the write lock while busy and
// the timing are this design's choices. Reads are combinational; a start
// takes one cycle of tag checking before `conf_done`.
module config_shell
  import dift_pkg::*;
#(
  parameter int unsigned N_REGS = 4,
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // register bus
  input  logic              cfg_we,
  input  logic [ADDR_W-1:0] cfg_addr,
  input  word_t             cfg_wdata,
  output word_t             cfg_rdata,
  output logic              irq,
  // to the accelerator
  output word_t             acc_regs [N_REGS],
  output logic              conf_done,
  output logic              acc_rst_n,
  input  logic              acc_done,
  // to the load and store shells
  output logic              enable,
  output logic              clear,
  output word_t             src_tag,
  output word_t             dst_tag,
  output idx_t              first_tag,
  output logic [4:0]        lg_off,
  input  logic              violation
);

  localparam int unsigned A_SRC    = 2*N_REGS;
  localparam int unsigned A_DST    = 2*N_REGS + 1;
  localparam int unsigned A_FIRST  = 2*N_REGS + 2;
  localparam int unsigned A_LGOFF  = 2*N_REGS + 3;
  localparam int unsigned A_CMD    = 2*N_REGS + 4;
  localparam int unsigned A_STATUS = 2*N_REGS + 5;

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_RUN} state_t;
  state_t state;

  word_t reg_tags [N_REGS];
  logic  done_q, cfg_viol_q, kill_q;
  logic  tags_ok;

  always_comb begin
    tags_ok = 1'b1;
    for (int k = 0; k < N_REGS; k++)
      if (reg_tags[k] != src_tag) tags_ok = 1'b0;
  end

  wire busy      = (state != S_IDLE);
  wire start_cmd = cfg_we && (cfg_addr == ADDR_W'(A_CMD)) && cfg_wdata[0] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      src_tag    <= '0;
      dst_tag    <= '0;
      first_tag  <= '0;
      lg_off     <= '0;
      done_q     <= 1'b0;
      cfg_viol_q <= 1'b0;
      kill_q     <= 1'b0;
      conf_done  <= 1'b0;
      clear      <= 1'b0;
      irq        <= 1'b0;
      for (int k = 0; k < N_REGS; k++) begin
        acc_regs[k] <= '0;
        reg_tags[k] <= '0;
      end
    end else begin
      conf_done <= 1'b0;
      clear     <= 1'b0;
      irq       <= 1'b0;
      // configuration writes are accepted only while idle
      if (cfg_we && !busy) begin
        for (int k = 0; k < N_REGS; k++) begin
          if (cfg_addr == ADDR_W'(k))          acc_regs[k] <= cfg_wdata;
          if (cfg_addr == ADDR_W'(N_REGS + k)) reg_tags[k] <= cfg_wdata;
        end
        if (cfg_addr == ADDR_W'(A_SRC))   src_tag   <= cfg_wdata;
        if (cfg_addr == ADDR_W'(A_DST))   dst_tag   <= cfg_wdata;
        if (cfg_addr == ADDR_W'(A_FIRST)) first_tag <= cfg_wdata[IDX_W-1:0];
        if (cfg_addr == ADDR_W'(A_LGOFF)) lg_off    <= cfg_wdata[4:0];
      end
      unique case (state)
        S_IDLE: if (start_cmd) begin
          state      <= S_CHECK;
          done_q     <= 1'b0;
          cfg_viol_q <= 1'b0;
          kill_q     <= 1'b0;
          clear      <= 1'b1;
        end
        S_CHECK: begin
          if (tags_ok) begin
            conf_done <= 1'b1;
            state     <= S_RUN;
          end else begin
            cfg_viol_q <= 1'b1;
            done_q     <= 1'b1;
            irq        <= 1'b1;
            state      <= S_IDLE;
          end
        end
        S_RUN: begin
          if (violation) begin
            kill_q <= 1'b1;
            done_q <= 1'b1;
            irq    <= 1'b1;
            state  <= S_IDLE;
          end else if (acc_done) begin
            done_q <= 1'b1;
            irq    <= 1'b1;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign enable    = (state == S_RUN);
  assign acc_rst_n = rst_n && !kill_q;

  always_comb begin
    cfg_rdata = '0;
    for (int k = 0; k < N_REGS; k++) begin
      if (cfg_addr == ADDR_W'(k))          cfg_rdata = acc_regs[k];
      if (cfg_addr == ADDR_W'(N_REGS + k)) cfg_rdata = reg_tags[k];
    end
    if (cfg_addr == ADDR_W'(A_SRC))    cfg_rdata = src_tag;
    if (cfg_addr == ADDR_W'(A_DST))    cfg_rdata = dst_tag;
    if (cfg_addr == ADDR_W'(A_FIRST))  cfg_rdata = word_t'(first_tag);
    if (cfg_addr == ADDR_W'(A_LGOFF))  cfg_rdata = word_t'(lg_off);
    if (cfg_addr == ADDR_W'(A_STATUS)) cfg_rdata = word_t'({busy, cfg_viol_q, violation, done_q});
  end

  initial assert (2*N_REGS + 6 <= 2**ADDR_W) else $error("register map does not fit ADDR_W");

endmodule
