// pagurus_top: three accelerator tiles, each a loosely coupled accelerator
// encapsulated in its DIFT shell: GRAY (tile 0), MEAN (tile 1) and MULTS
// (tile 2).
//
// Each tile presents to the system the interface of a shelled accelerator:
// a word-addressed configuration bus, an interrupt, and a DMA read and a DMA
// write channel (valid/ready request with word index and length, then
// valid/ready data words). The network or bus, the memory controller, main
// memory and the processor that drives the configuration buses live outside
// and connect through these ports. Tile t's ports are element t of each
// array. The shell rewrites the accelerator's bursts around the interleaved
// tags, checks the input tags, tags the output and stops the accelerator on
// a violation; `violation` and `tags_written` are brought out for
// observation. BURST sets each accelerator's PLM depth and largest burst, in
// 64-bit words (1024 words = 8 KiB, the largest burst in the evaluation).
module pagurus_top
  import dift_pkg::*;
#(
  parameter int unsigned BURST  = 1024,
  parameter int unsigned ADDR_W = 8,
  localparam int unsigned NT    = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we           [NT],
  input  logic [ADDR_W-1:0] cfg_addr         [NT],
  input  word_t             cfg_wdata        [NT],
  output word_t             cfg_rdata        [NT],
  output logic              irq              [NT],
  output logic              mem_rd_req_valid [NT],
  input  logic              mem_rd_req_ready [NT],
  output dma_req_t          mem_rd_req       [NT],
  input  logic              mem_rd_valid     [NT],
  output logic              mem_rd_ready     [NT],
  input  word_t             mem_rd_data      [NT],
  output logic              mem_wr_req_valid [NT],
  input  logic              mem_wr_req_ready [NT],
  output dma_req_t          mem_wr_req       [NT],
  output logic              mem_wr_valid     [NT],
  input  logic              mem_wr_ready     [NT],
  output word_t             mem_wr_data      [NT],
  output logic              violation        [NT],
  output idx_t              tags_written     [NT]
);

  // accelerator-side signals of every tile
  logic     conf_done [NT], acc_rst_n [NT], acc_done [NT];
  logic     rd_req_valid [NT], rd_req_ready [NT], rd_valid [NT], rd_ready [NT];
  logic     wr_req_valid [NT], wr_req_ready [NT], wr_valid [NT], wr_ready [NT];
  dma_req_t rd_req [NT], wr_req [NT];
  word_t    rd_data [NT], wr_data [NT];

  word_t gray_regs [3];
  word_t mean_regs [4];
  word_t mults_regs [4];

  // ---------------------------------------------------------------- GRAY
  dift_shell #(.N_REGS(3), .ADDR_W(ADDR_W)) u_shell_gray (
    .clk, .rst_n,
    .cfg_we(cfg_we[0]), .cfg_addr(cfg_addr[0]), .cfg_wdata(cfg_wdata[0]),
    .cfg_rdata(cfg_rdata[0]), .irq(irq[0]),
    .mem_rd_req_valid(mem_rd_req_valid[0]), .mem_rd_req_ready(mem_rd_req_ready[0]),
    .mem_rd_req(mem_rd_req[0]), .mem_rd_valid(mem_rd_valid[0]),
    .mem_rd_ready(mem_rd_ready[0]), .mem_rd_data(mem_rd_data[0]),
    .mem_wr_req_valid(mem_wr_req_valid[0]), .mem_wr_req_ready(mem_wr_req_ready[0]),
    .mem_wr_req(mem_wr_req[0]), .mem_wr_valid(mem_wr_valid[0]),
    .mem_wr_ready(mem_wr_ready[0]), .mem_wr_data(mem_wr_data[0]),
    .acc_regs(gray_regs), .acc_conf_done(conf_done[0]), .acc_rst_n(acc_rst_n[0]),
    .acc_done(acc_done[0]),
    .acc_rd_req_valid(rd_req_valid[0]), .acc_rd_req_ready(rd_req_ready[0]), .acc_rd_req(rd_req[0]),
    .acc_rd_valid(rd_valid[0]), .acc_rd_ready(rd_ready[0]), .acc_rd_data(rd_data[0]),
    .acc_wr_req_valid(wr_req_valid[0]), .acc_wr_req_ready(wr_req_ready[0]), .acc_wr_req(wr_req[0]),
    .acc_wr_valid(wr_valid[0]), .acc_wr_ready(wr_ready[0]), .acc_wr_data(wr_data[0]),
    .violation(violation[0]), .tags_written(tags_written[0])
  );

  gray_acc #(.BURST(BURST)) u_gray (
    .clk, .rst_n(acc_rst_n[0]), .conf_done(conf_done[0]), .conf(gray_regs), .done(acc_done[0]),
    .rd_req_valid(rd_req_valid[0]), .rd_req_ready(rd_req_ready[0]), .rd_req(rd_req[0]),
    .rd_valid(rd_valid[0]), .rd_ready(rd_ready[0]), .rd_data(rd_data[0]),
    .wr_req_valid(wr_req_valid[0]), .wr_req_ready(wr_req_ready[0]), .wr_req(wr_req[0]),
    .wr_valid(wr_valid[0]), .wr_ready(wr_ready[0]), .wr_data(wr_data[0])
  );

  // ---------------------------------------------------------------- MEAN
  dift_shell #(.N_REGS(4), .ADDR_W(ADDR_W)) u_shell_mean (
    .clk, .rst_n,
    .cfg_we(cfg_we[1]), .cfg_addr(cfg_addr[1]), .cfg_wdata(cfg_wdata[1]),
    .cfg_rdata(cfg_rdata[1]), .irq(irq[1]),
    .mem_rd_req_valid(mem_rd_req_valid[1]), .mem_rd_req_ready(mem_rd_req_ready[1]),
    .mem_rd_req(mem_rd_req[1]), .mem_rd_valid(mem_rd_valid[1]),
    .mem_rd_ready(mem_rd_ready[1]), .mem_rd_data(mem_rd_data[1]),
    .mem_wr_req_valid(mem_wr_req_valid[1]), .mem_wr_req_ready(mem_wr_req_ready[1]),
    .mem_wr_req(mem_wr_req[1]), .mem_wr_valid(mem_wr_valid[1]),
    .mem_wr_ready(mem_wr_ready[1]), .mem_wr_data(mem_wr_data[1]),
    .acc_regs(mean_regs), .acc_conf_done(conf_done[1]), .acc_rst_n(acc_rst_n[1]),
    .acc_done(acc_done[1]),
    .acc_rd_req_valid(rd_req_valid[1]), .acc_rd_req_ready(rd_req_ready[1]), .acc_rd_req(rd_req[1]),
    .acc_rd_valid(rd_valid[1]), .acc_rd_ready(rd_ready[1]), .acc_rd_data(rd_data[1]),
    .acc_wr_req_valid(wr_req_valid[1]), .acc_wr_req_ready(wr_req_ready[1]), .acc_wr_req(wr_req[1]),
    .acc_wr_valid(wr_valid[1]), .acc_wr_ready(wr_ready[1]), .acc_wr_data(wr_data[1]),
    .violation(violation[1]), .tags_written(tags_written[1])
  );

  mean_acc #(.BURST(BURST)) u_mean (
    .clk, .rst_n(acc_rst_n[1]), .conf_done(conf_done[1]), .conf(mean_regs), .done(acc_done[1]),
    .rd_req_valid(rd_req_valid[1]), .rd_req_ready(rd_req_ready[1]), .rd_req(rd_req[1]),
    .rd_valid(rd_valid[1]), .rd_ready(rd_ready[1]), .rd_data(rd_data[1]),
    .wr_req_valid(wr_req_valid[1]), .wr_req_ready(wr_req_ready[1]), .wr_req(wr_req[1]),
    .wr_valid(wr_valid[1]), .wr_ready(wr_ready[1]), .wr_data(wr_data[1])
  );

  // ---------------------------------------------------------------- MULTS
  dift_shell #(.N_REGS(4), .ADDR_W(ADDR_W)) u_shell_mults (
    .clk, .rst_n,
    .cfg_we(cfg_we[2]), .cfg_addr(cfg_addr[2]), .cfg_wdata(cfg_wdata[2]),
    .cfg_rdata(cfg_rdata[2]), .irq(irq[2]),
    .mem_rd_req_valid(mem_rd_req_valid[2]), .mem_rd_req_ready(mem_rd_req_ready[2]),
    .mem_rd_req(mem_rd_req[2]), .mem_rd_valid(mem_rd_valid[2]),
    .mem_rd_ready(mem_rd_ready[2]), .mem_rd_data(mem_rd_data[2]),
    .mem_wr_req_valid(mem_wr_req_valid[2]), .mem_wr_req_ready(mem_wr_req_ready[2]),
    .mem_wr_req(mem_wr_req[2]), .mem_wr_valid(mem_wr_valid[2]),
    .mem_wr_ready(mem_wr_ready[2]), .mem_wr_data(mem_wr_data[2]),
    .acc_regs(mults_regs), .acc_conf_done(conf_done[2]), .acc_rst_n(acc_rst_n[2]),
    .acc_done(acc_done[2]),
    .acc_rd_req_valid(rd_req_valid[2]), .acc_rd_req_ready(rd_req_ready[2]), .acc_rd_req(rd_req[2]),
    .acc_rd_valid(rd_valid[2]), .acc_rd_ready(rd_ready[2]), .acc_rd_data(rd_data[2]),
    .acc_wr_req_valid(wr_req_valid[2]), .acc_wr_req_ready(wr_req_ready[2]), .acc_wr_req(wr_req[2]),
    .acc_wr_valid(wr_valid[2]), .acc_wr_ready(wr_ready[2]), .acc_wr_data(wr_data[2]),
    .violation(violation[2]), .tags_written(tags_written[2])
  );

  mults_acc #(.BURST(BURST)) u_mults (
    .clk, .rst_n(acc_rst_n[2]), .conf_done(conf_done[2]), .conf(mults_regs), .done(acc_done[2]),
    .rd_req_valid(rd_req_valid[2]), .rd_req_ready(rd_req_ready[2]), .rd_req(rd_req[2]),
    .rd_valid(rd_valid[2]), .rd_ready(rd_ready[2]), .rd_data(rd_data[2]),
    .wr_req_valid(wr_req_valid[2]), .wr_req_ready(wr_req_ready[2]), .wr_req(wr_req[2]),
    .wr_valid(wr_valid[2]), .wr_ready(wr_ready[2]), .wr_data(wr_data[2])
  );

endmodule
