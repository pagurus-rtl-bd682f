// dift_shell: the DIFT shell that encapsulates one loosely coupled accelerator.
//
// It exposes to the system the same kind of interface the accelerator has (a
// configuration register bus, a DMA read port, a DMA write port and an
// interrupt), and to the accelerator its unmodified interface. Inside, the
// configuration shell keeps the tagged configuration registers and the tag
// settings, the load shell rewrites read bursts to skip and check the
// interleaved input tags, and the store shell rewrites write bursts to
// interleave dst_tag with the outputs. The accelerator never sees a tag. The
// only thing the shell must know of the accelerator is its number of
// configuration registers, N_REGS. DMA indices on both sides are word offsets
// into the accelerator's buffer; the system adds the buffer's base. The
// three-part structure follows the shell description; see the parts for their
// timing.
module dift_shell
  import dift_pkg::*;
#(
  parameter int unsigned N_REGS = 4,
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // system side: configuration bus and interrupt
  input  logic              cfg_we,
  input  logic [ADDR_W-1:0] cfg_addr,
  input  word_t             cfg_wdata,
  output word_t             cfg_rdata,
  output logic              irq,
  // system side: DMA read
  output logic              mem_rd_req_valid,
  input  logic              mem_rd_req_ready,
  output dma_req_t          mem_rd_req,
  input  logic              mem_rd_valid,
  output logic              mem_rd_ready,
  input  word_t             mem_rd_data,
  // system side: DMA write
  output logic              mem_wr_req_valid,
  input  logic              mem_wr_req_ready,
  output dma_req_t          mem_wr_req,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output word_t             mem_wr_data,
  // accelerator side
  output word_t             acc_regs [N_REGS],
  output logic              acc_conf_done,
  output logic              acc_rst_n,
  input  logic              acc_done,
  input  logic              acc_rd_req_valid,
  output logic              acc_rd_req_ready,
  input  dma_req_t          acc_rd_req,
  output logic              acc_rd_valid,
  input  logic              acc_rd_ready,
  output word_t             acc_rd_data,
  input  logic              acc_wr_req_valid,
  output logic              acc_wr_req_ready,
  input  dma_req_t          acc_wr_req,
  input  logic              acc_wr_valid,
  output logic              acc_wr_ready,
  input  word_t             acc_wr_data,
  // observation
  output logic              violation,
  output idx_t              tags_written
);

  logic       enable, clear;
  word_t      src_tag, dst_tag;
  idx_t       first_tag;
  logic [4:0] lg_off;

  config_shell #(.N_REGS(N_REGS), .ADDR_W(ADDR_W)) u_config (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .irq,
    .acc_regs, .conf_done(acc_conf_done), .acc_rst_n, .acc_done,
    .enable, .clear, .src_tag, .dst_tag, .first_tag, .lg_off, .violation
  );

  load_shell u_load (
    .clk, .rst_n, .enable, .clear, .src_tag, .first_tag, .lg_off, .violation,
    .acc_req_valid(acc_rd_req_valid), .acc_req_ready(acc_rd_req_ready), .acc_req(acc_rd_req),
    .acc_data_valid(acc_rd_valid), .acc_data_ready(acc_rd_ready), .acc_data(acc_rd_data),
    .mem_req_valid(mem_rd_req_valid), .mem_req_ready(mem_rd_req_ready), .mem_req(mem_rd_req),
    .mem_data_valid(mem_rd_valid), .mem_data_ready(mem_rd_ready), .mem_data(mem_rd_data)
  );

  store_shell u_store (
    .clk, .rst_n, .enable, .violation, .dst_tag, .first_tag, .lg_off,
    .acc_req_valid(acc_wr_req_valid), .acc_req_ready(acc_wr_req_ready), .acc_req(acc_wr_req),
    .acc_data_valid(acc_wr_valid), .acc_data_ready(acc_wr_ready), .acc_data(acc_wr_data),
    .mem_req_valid(mem_wr_req_valid), .mem_req_ready(mem_wr_req_ready), .mem_req(mem_wr_req),
    .mem_data_valid(mem_wr_valid), .mem_data_ready(mem_wr_ready), .mem_data(mem_wr_data),
    .tags_written
  );

endmodule
