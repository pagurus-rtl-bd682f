// dift_shell_tb: self-checking testbench of the shell around an accelerator.
//
// The grayscale accelerator (small bursts) is wrapped in the shell and the
// system side is the memory model with random back-pressure. The testbench
// plays the processor and its driver: it lays out an interleaved input image
// with a random first-tag location, programs registers, tags and offsets over
// the configuration bus, starts the shell and waits for the interrupt.
//   Run 1 (tag offset 4): every output pixel must be correct, every tag
//   position inside the output span must hold dst_tag, the status must read done.
//   Run 2: one input tag is overwritten. The status must report the input
//   violation, and the output must show that the accelerator was stopped:
//   no output burst whose input lies wholly after the bad tag was written.
module dift_shell_tb;
  import dift_pkg::*;

  localparam int unsigned BURST = 8, DEPTH = 4096, N = 3;
  localparam int unsigned A_SRC = 2*N, A_DST = 2*N+1, A_FIRST = 2*N+2, A_LG = 2*N+3,
                          A_CMD = 2*N+4, A_ST = 2*N+5;
  localparam word_t SRC_TAG = 64'h0123_4567_89ab_cdef, DST_TAG = 64'hfedc_ba98_7654_3210;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  dift_shell #(.N_REGS(N)) dut (.*);

  gray_acc #(.BURST(BURST)) u_acc (
    .clk, .rst_n(acc_rst_n), .conf_done(acc_conf_done), .conf(acc_regs), .done(acc_done),
    .rd_req_valid(acc_rd_req_valid), .rd_req_ready(acc_rd_req_ready), .rd_req(acc_rd_req),
    .rd_valid(acc_rd_valid), .rd_ready(acc_rd_ready), .rd_data(acc_rd_data),
    .wr_req_valid(acc_wr_req_valid), .wr_req_ready(acc_wr_req_ready), .wr_req(acc_wr_req),
    .wr_valid(acc_wr_valid), .wr_ready(acc_wr_ready), .wr_data(acc_wr_data)
  );

  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(15)) u_mem (
    .clk, .rst_n,
    .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready), .rd_req(mem_rd_req),
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_data(mem_rd_data),
    .wr_req_valid(mem_wr_req_valid), .wr_req_ready(mem_wr_req_ready), .wr_req(mem_wr_req),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_data(mem_wr_data)
  );

  int checks = 0, failures = 0;
  localparam int unsigned IN_BASE = 0, OUT_BASE = 1024;
  int unsigned phys_of [DEPTH];   // logical word -> physical word

  function automatic bit is_tag_pos(int unsigned p, int unsigned f, int unsigned t);
    return (p == f) || (p > f && (p - f) % (t + 1) == 0);
  endfunction

  function automatic word_t ref_gray(word_t px);
    longint unsigned s;
    s = longint'(px[15:0]) * 19595 + longint'(px[31:16]) * 38470 + longint'(px[47:32]) * 7471;
    return word_t'(s) << 16;
  endfunction

  task automatic wr(input int unsigned a, input word_t d);
    @(posedge clk); cfg_we <= 1; cfg_addr <= 8'(a); cfg_wdata <= d;
    @(posedge clk); cfg_we <= 0;
  endtask

  // The tag layout spans the accelerator's whole buffer, from word 0: fill
  // every tag position with SRC_TAG and record where each logical word lives.
  task automatic prepare(input int unsigned n, f, t);
    int unsigned d;
    d = 0;
    for (int unsigned p = 0; p < DEPTH; p++) begin
      if (is_tag_pos(p, f, t)) u_mem.mem[p] = SRC_TAG;
      else begin
        u_mem.mem[p] = '0;
        if (d < DEPTH) phys_of[d] = p;
        d++;
      end
    end
    for (int unsigned q = 0; q < n; q++)
      u_mem.mem[phys_of[IN_BASE + q]] = {16'h0, 16'($urandom), 16'($urandom), 16'($urandom)};
  endtask

  task automatic start(input int unsigned n, f, lg);
    wr(0, word_t'(IN_BASE)); wr(1, word_t'(OUT_BASE)); wr(2, word_t'(n));
    for (int k = 0; k < N; k++) wr(N + k, SRC_TAG);
    wr(A_SRC, SRC_TAG); wr(A_DST, DST_TAG); wr(A_FIRST, word_t'(f)); wr(A_LG, word_t'(lg));
    wr(A_CMD, 64'd1);
    @(posedge clk);
    while (!irq) @(posedge clk);
    repeat (2) @(posedge clk);
    cfg_addr <= 8'(A_ST);
    @(negedge clk);
  endtask

  initial begin
    int unsigned n, f, t, p, d, bad, bad_px, written;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run 1: clean input
    n = 45; t = 4; f = $urandom_range(t);
    prepare(n, f, t);
    start(n, f, 2);
    checks++;
    if (cfg_rdata != 64'b0001) begin failures++; $display("status %b", cfg_rdata); end
    for (d = 0; d < n; d++) begin
      checks++;
      if (u_mem.mem[phys_of[OUT_BASE + d]] != ref_gray(u_mem.mem[phys_of[IN_BASE + d]])) begin
        failures++; $display("pixel %0d wrong", d);
      end
    end
    // every tag position inside the output span holds dst_tag
    for (p = phys_of[OUT_BASE]; p <= phys_of[OUT_BASE + n - 1]; p++)
      if (is_tag_pos(p, f, t)) begin
        checks++;
        if (u_mem.mem[p] != DST_TAG) begin failures++; $display("output tag at %0d missing", p); end
      end
    checks++;
    if (u_mem.oob_count != 0) failures++;
    // run 2: overwrite the tag after pixel 20; output bursts are of BURST pixels
    n = 45; f = 1; t = 4;
    prepare(n, f, t);
    bad = phys_of[IN_BASE + 20] + 1;
    while (!is_tag_pos(bad, f, t)) bad++;
    u_mem.mem[bad] = 64'h0;
    bad_px = 0;
    while (bad_px < n && phys_of[IN_BASE + bad_px] < bad) bad_px++;   // first pixel after the bad tag
    start(n, f, 2);
    checks++;
    if (cfg_rdata != 64'b0011) begin failures++; $display("status after attack %b", cfg_rdata); end
    checks++;
    if (!violation) begin failures++; $display("violation flag low"); end
    // count output pixels that reached memory
    written = 0;
    for (int unsigned q = 0; q < n; q++)
      if (u_mem.mem[phys_of[OUT_BASE + q]] != '0) written++;
    checks++;
    // the burst holding the bad tag's pixel and all later ones never leave
    if (written > (bad_px / BURST) * BURST) begin
      failures++; $display("%0d pixels leaked, at most %0d allowed", written, (bad_px / BURST) * BURST);
    end
    $display("run 2: %0d of %0d output pixels written before the shell stopped the accelerator", written, n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
