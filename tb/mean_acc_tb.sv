// mean_acc_tb: self-checking testbench of the column-mean accelerator alone.
//
// A 5 x 19 matrix of signed Q32.32 values (more columns than one burst, so
// the chunk loop runs three times) is averaged with random memory
// back-pressure, then a 3 x 4 matrix. Outputs are compared with the
// truncated-toward-zero quotient of the column sums computed here; the load
// and store burst counts are checked against rows * chunks and chunks.
module mean_acc_tb;
  import dift_pkg::*;

  localparam int unsigned BURST = 8;
  localparam int unsigned DEPTH = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic conf_done, done;
  word_t conf [4];
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready;
  dma_req_t rd_req, wr_req;
  word_t rd_data, wr_data;

  mean_acc #(.BURST(BURST)) dut (.*);
  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(20)) u_mem (.*);

  int checks = 0, failures = 0;

  task automatic run(input int unsigned src, dst, rows, cols);
    int unsigned rd0, wr0, chunks;
    longint s, e;
    rd0 = u_mem.rd_bursts;
    wr0 = u_mem.wr_bursts;
    chunks = (cols + BURST - 1) / BURST;
    for (int p = 0; p < rows * cols; p++)
      u_mem.mem[src + p] = word_t'(longint'($signed($urandom)) <<< 8);
    conf[0] = word_t'(src); conf[1] = word_t'(dst);
    conf[2] = word_t'(rows); conf[3] = word_t'(cols);
    @(posedge clk); conf_done <= 1;
    @(posedge clk); conf_done <= 0;
    wait (done);
    @(posedge clk);
    for (int c = 0; c < cols; c++) begin
      s = 0;
      for (int r = 0; r < rows; r++) s += longint'(u_mem.mem[src + r * cols + c]);
      e = s / longint'(rows);
      checks++;
      if (u_mem.mem[dst + c] !== word_t'(e)) begin
        failures++;
        $display("column %0d: got %h expected %h", c, u_mem.mem[dst + c], e);
      end
    end
    checks++;
    if (u_mem.rd_bursts - rd0 != rows * chunks || u_mem.wr_bursts - wr0 != chunks) begin
      failures++;
      $display("burst counts %0d/%0d", u_mem.rd_bursts - rd0, u_mem.wr_bursts - wr0);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) u_mem.mem[a] = '0;
    conf_done = 0;
    for (int q = 0; q < 4; q++) conf[q] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 500, 5, 19);
    run(600, 700, 3, 4);
    checks++;
    if (u_mem.oob_count != 0) failures++;
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
