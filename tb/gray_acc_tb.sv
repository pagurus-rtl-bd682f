// gray_acc_tb: self-checking testbench of the grayscale accelerator alone.
//
// The accelerator talks straight to the memory model (no shell), with random
// back-pressure. An image whose pixel count is not a multiple of the burst is
// converted, then a second, shorter one, to check that a new invocation works
// after the first. Every output word is compared with the luminance computed
// here, and the number of load and store bursts with ceil(pixels / BURST).
module gray_acc_tb;
  import dift_pkg::*;

  localparam int unsigned BURST = 8;
  localparam int unsigned DEPTH = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic conf_done, done;
  word_t conf [3];
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready;
  dma_req_t rd_req, wr_req;
  word_t rd_data, wr_data;

  gray_acc #(.BURST(BURST)) dut (.*);

  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(20)) u_mem (.*);

  int checks = 0, failures = 0;

  function automatic word_t ref_gray(word_t px);
    longint unsigned s;
    s = longint'(px[15:0]) * 19595 + longint'(px[31:16]) * 38470 + longint'(px[47:32]) * 7471;
    return word_t'(s) << 16;
  endfunction

  task automatic run(input int unsigned src, dst, n);
    int unsigned rd0, wr0;
    rd0 = u_mem.rd_bursts;
    wr0 = u_mem.wr_bursts;
    for (int p = 0; p < n; p++)
      u_mem.mem[src + p] = {16'h0, 16'($urandom), 16'($urandom), 16'($urandom)};
    u_mem.mem[src + n] = 64'hdead;  // must not be converted
    conf[0] = word_t'(src); conf[1] = word_t'(dst); conf[2] = word_t'(n);
    @(posedge clk); conf_done <= 1;
    @(posedge clk); conf_done <= 0;
    wait (done);
    @(posedge clk);
    for (int p = 0; p < n; p++) begin
      checks++;
      if (u_mem.mem[dst + p] !== ref_gray(u_mem.mem[src + p])) begin
        failures++;
        $display("pixel %0d: got %h expected %h", p, u_mem.mem[dst + p], ref_gray(u_mem.mem[src + p]));
      end
    end
    checks++;
    if (u_mem.mem[dst + n] !== 64'h0) begin failures++; $display("write past the output"); end
    checks++;
    if (u_mem.rd_bursts - rd0 != (n + BURST - 1) / BURST ||
        u_mem.wr_bursts - wr0 != (n + BURST - 1) / BURST) begin
      failures++;
      $display("burst counts %0d/%0d", u_mem.rd_bursts - rd0, u_mem.wr_bursts - wr0);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) u_mem.mem[a] = '0;
    conf_done = 0;
    conf[0] = '0; conf[1] = '0; conf[2] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16, 200, 37);
    run(400, 600, 5);
    checks++;
    if (u_mem.oob_count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
