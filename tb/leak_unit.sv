// leak_unit: one worst-case leakage experiment on a shelled GRAY or MEAN
// accelerator, used by leakage_tb.
//
// It holds a shell, one accelerator (ACC = 0: GRAY, 1: MEAN) with a given
// burst size and its own memory model. On a `go` pulse it lays out a buffer
// whose first tag sits after `f` data words and whose tag offset is 2**lg,
// then plays an attacker who overwrites the whole input region, tags
// included, with data of its own (no tag survives). It programs the shell,
// starts it, waits for the interrupt and reports the status register and the
// number of output words that reached memory (`leaked`). `busy` is high from
// `go` to the report. The input is ROWS x COLS words at word 0 (GRAY: that
// many pixels); the output follows it.
//
// `expected` is worked out here from the accelerator's burst order alone:
// a load burst is caught when its physical span holds a tag or is directly
// followed by one; everything stored before the first caught burst leaks.
// GRAY stores each load burst before the next; MEAN stores one chunk of
// BURST columns after loading that chunk of every row. Tag positions are found
// with a modulo, independently of the shell.
module leak_unit
  import dift_pkg::*;
#(
  parameter int unsigned ACC   = 0,
  parameter int unsigned BURST = 16,
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 128,
  parameter int unsigned DEPTH = 34816
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        go,
  input  int unsigned f,
  input  int unsigned lg,
  output logic        busy,
  output int unsigned leaked,
  output int unsigned expected,
  output int unsigned nout,
  output word_t       status
);

  localparam int unsigned N = (ACC == 0) ? 3 : 4;
  localparam int unsigned NIN = ROWS * COLS;
  localparam int unsigned NOUT = (ACC == 0) ? NIN : COLS;
  localparam int unsigned A_SRC = 2*N, A_DST = 2*N+1, A_FIRST = 2*N+2, A_LG = 2*N+3,
                          A_CMD = 2*N+4, A_ST = 2*N+5;
  localparam word_t SRC_TAG = 64'h5eed_0000_1234_5678, DST_TAG = 64'h0dd0_0000_8765_4321;
  localparam int unsigned IN_BASE = 0, OUT_BASE = NIN;

  logic cfg_we, irq, violation;
  logic [7:0] cfg_addr;
  word_t cfg_wdata, cfg_rdata;
  idx_t tags_written;
  logic mem_rd_req_valid, mem_rd_req_ready, mem_rd_valid, mem_rd_ready;
  logic mem_wr_req_valid, mem_wr_req_ready, mem_wr_valid, mem_wr_ready;
  dma_req_t mem_rd_req, mem_wr_req;
  word_t mem_rd_data, mem_wr_data;
  word_t acc_regs [N];
  logic acc_conf_done, acc_rst_n, acc_done;
  logic acc_rd_req_valid, acc_rd_req_ready, acc_rd_valid, acc_rd_ready;
  logic acc_wr_req_valid, acc_wr_req_ready, acc_wr_valid, acc_wr_ready;
  dma_req_t acc_rd_req, acc_wr_req;
  word_t acc_rd_data, acc_wr_data;

  dift_shell #(.N_REGS(N)) u_shell (.*);

  if (ACC == 0) begin : g_gray
    gray_acc #(.BURST(BURST)) u_acc (
      .clk, .rst_n(acc_rst_n), .conf_done(acc_conf_done), .conf(acc_regs), .done(acc_done),
      .rd_req_valid(acc_rd_req_valid), .rd_req_ready(acc_rd_req_ready), .rd_req(acc_rd_req),
      .rd_valid(acc_rd_valid), .rd_ready(acc_rd_ready), .rd_data(acc_rd_data),
      .wr_req_valid(acc_wr_req_valid), .wr_req_ready(acc_wr_req_ready), .wr_req(acc_wr_req),
      .wr_valid(acc_wr_valid), .wr_ready(acc_wr_ready), .wr_data(acc_wr_data)
    );
  end else begin : g_mean
    mean_acc #(.BURST(BURST)) u_acc (
      .clk, .rst_n(acc_rst_n), .conf_done(acc_conf_done), .conf(acc_regs), .done(acc_done),
      .rd_req_valid(acc_rd_req_valid), .rd_req_ready(acc_rd_req_ready), .rd_req(acc_rd_req),
      .rd_valid(acc_rd_valid), .rd_ready(acc_rd_ready), .rd_data(acc_rd_data),
      .wr_req_valid(acc_wr_req_valid), .wr_req_ready(acc_wr_req_ready), .wr_req(acc_wr_req),
      .wr_valid(acc_wr_valid), .wr_ready(acc_wr_ready), .wr_data(acc_wr_data)
    );
  end

  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(10)) u_mem (
    .clk, .rst_n,
    .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready), .rd_req(mem_rd_req),
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_data(mem_rd_data),
    .wr_req_valid(mem_wr_req_valid), .wr_req_ready(mem_wr_req_ready), .wr_req(mem_wr_req),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_data(mem_wr_data)
  );

  int unsigned phys_of [NIN + NOUT];   // logical word -> physical word
  int unsigned lay_f, lay_t;

  function automatic bit is_tag_pos(int unsigned p, int unsigned ff, int unsigned t);
    return (p == ff) || (p > ff && (p - ff) % (t + 1) == 0);
  endfunction

  // does the load burst of data words [s, s+len) meet a tag?
  function automatic bit caught(int unsigned s, int unsigned len);
    int unsigned e = s + len - 1;
    return (phys_of[e] - phys_of[s] != e - s) || is_tag_pos(phys_of[e] + 1, lay_f, lay_t);
  endfunction

  function automatic int unsigned predict();
    int unsigned n = 0, w;
    if (ACC == 0) begin
      for (int unsigned s = 0; s < NIN; s += BURST) begin
        w = (NIN - s < BURST) ? NIN - s : BURST;
        if (caught(IN_BASE + s, w)) return n;
        n += w;
      end
    end else begin
      for (int unsigned c = 0; c < COLS; c += BURST) begin
        w = (COLS - c < BURST) ? COLS - c : BURST;
        for (int unsigned r = 0; r < ROWS; r++)
          if (caught(IN_BASE + r * COLS + c, w)) return n;
        n += w;
      end
    end
    return n;
  endfunction

  task automatic wr(input int unsigned a, input word_t d);
    @(posedge clk); cfg_we <= 1; cfg_addr <= 8'(a); cfg_wdata <= d;
    @(posedge clk); cfg_we <= 0;
  endtask

  task automatic run(input int unsigned ff, input int unsigned lgo);
    int unsigned d;
    lay_f = ff; lay_t = 1 << lgo;
    d = 0;
    for (int unsigned p = 0; p < DEPTH; p++) begin
      u_mem.mem[p] = is_tag_pos(p, ff, lay_t) ? SRC_TAG : '0;
      if (!is_tag_pos(p, ff, lay_t) && d < NIN + NOUT) begin phys_of[d] = p; d++; end
    end
    expected = predict();
    // the attacker overwrites the input region word by word, tags included
    for (int unsigned p = phys_of[IN_BASE]; p <= phys_of[IN_BASE + NIN - 1]; p++)
      u_mem.mem[p] = {16'h0, 16'h0041, 16'h0042, 16'h0043};
    wr(0, word_t'(IN_BASE)); wr(1, word_t'(OUT_BASE));
    if (ACC == 0) wr(2, word_t'(NIN));
    else begin wr(2, word_t'(ROWS)); wr(3, word_t'(COLS)); end
    for (int k = 0; k < N; k++) wr(N + k, SRC_TAG);
    wr(A_SRC, SRC_TAG); wr(A_DST, DST_TAG); wr(A_FIRST, word_t'(ff)); wr(A_LG, word_t'(lgo));
    wr(A_CMD, 64'd1);
    @(posedge clk);
    while (!irq) @(posedge clk);
    repeat (2) @(posedge clk);
    cfg_addr <= 8'(A_ST);
    @(negedge clk);
    status = cfg_rdata;
    leaked = 0;
    for (int unsigned q = 0; q < NOUT; q++)
      if (u_mem.mem[phys_of[OUT_BASE + q]] != '0) leaked++;
  endtask

  assign nout = NOUT;

  initial begin
    busy = 0; leaked = 0; expected = 0; status = '0;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    forever begin
      @(posedge clk);
      if (go && rst_n) begin
        busy = 1;
        run(f, lg);
        busy = 0;
      end
    end
  end

endmodule
