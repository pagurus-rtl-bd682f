// mults_acc_tb: self-checking testbench of the A * A^T accelerator alone.
//
// Three runs with random memory back-pressure: a 4 x 11 matrix (rows longer
// than one burst, so each dot product spans two chunks), a 10 x 5 matrix
// (an output row longer than one burst, so it leaves in two store bursts, and
// row i is reused from the PLM) and a 1 x 1 matrix. Each output is compared
// with the Q32.32 dot product computed here, and the burst counts with the
// loop structure: loads = R*R*chunks*2 (or R + R*R when a row fits), stores =
// R * ceil(R / BURST).
module mults_acc_tb;
  import dift_pkg::*;

  localparam int unsigned BURST = 8;
  localparam int unsigned DEPTH = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic conf_done, done;
  word_t conf [4];
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready;
  dma_req_t rd_req, wr_req;
  word_t rd_data, wr_data;

  mults_acc #(.BURST(BURST)) dut (.*);
  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(20)) u_mem (.*);

  int checks = 0, failures = 0;

  function automatic word_t ref_mul(word_t a, word_t b);
    logic signed [127:0] p;
    p = $signed(a) * $signed(b);
    return p[95:32];
  endfunction

  task automatic run(input int unsigned src, dst, rows, cols);
    int unsigned rd0, wr0, chunks, exp_rd;
    word_t s;
    rd0 = u_mem.rd_bursts;
    wr0 = u_mem.wr_bursts;
    chunks = (cols + BURST - 1) / BURST;
    exp_rd = (chunks == 1) ? rows + rows * rows : 2 * rows * rows * chunks;
    for (int p = 0; p < rows * cols; p++)
      u_mem.mem[src + p] = word_t'(longint'($signed($urandom)) <<< 4);
    conf[0] = word_t'(src); conf[1] = word_t'(dst);
    conf[2] = word_t'(rows); conf[3] = word_t'(cols);
    @(posedge clk); conf_done <= 1;
    @(posedge clk); conf_done <= 0;
    wait (done);
    @(posedge clk);
    for (int i = 0; i < rows; i++)
      for (int j = 0; j < rows; j++) begin
        s = '0;
        for (int c = 0; c < cols; c++)
          s += ref_mul(u_mem.mem[src + i * cols + c], u_mem.mem[src + j * cols + c]);
        checks++;
        if (u_mem.mem[dst + i * rows + j] !== s) begin
          failures++;
          $display("(%0d,%0d): got %h expected %h", i, j, u_mem.mem[dst + i * rows + j], s);
        end
      end
    checks++;
    if (u_mem.rd_bursts - rd0 != exp_rd ||
        u_mem.wr_bursts - wr0 != rows * ((rows + BURST - 1) / BURST)) begin
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
    run(0, 100, 4, 11);
    run(200, 300, 10, 5);
    run(500, 510, 1, 1);
    checks++;
    if (u_mem.oob_count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
