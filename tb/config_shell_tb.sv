// config_shell_tb: self-checking testbench of the shell's configuration side.
//
// With N_REGS = 3 it checks: register write and read-back at every address of
// the map; a start with correct register tags gives `clear` at once and
// `conf_done` exactly one cycle later (after the tag check), `enable` while
// running and a one-cycle `irq` after `acc_done`; writes are ignored while
// busy; a start with one wrong register tag is refused (no `conf_done`, status
// bit 2, `irq`); an input tag violation while running raises `irq`, status
// bit 1 and holds the accelerator in reset until the next start.
module config_shell_tb;
  import dift_pkg::*;

  localparam int unsigned N = 3;
  localparam int unsigned A_SRC = 2*N, A_DST = 2*N+1, A_FIRST = 2*N+2, A_LG = 2*N+3,
                          A_CMD = 2*N+4, A_ST = 2*N+5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, irq, conf_done, acc_rst_n, acc_done, enable, clear, violation;
  logic [7:0] cfg_addr;
  word_t cfg_wdata, cfg_rdata, src_tag, dst_tag;
  word_t acc_regs [N];
  idx_t first_tag;
  logic [4:0] lg_off;

  config_shell #(.N_REGS(N)) dut (.*);

  int checks = 0, failures = 0;
  int conf_done_cnt = 0, irq_cnt = 0;
  always @(posedge clk) begin
    if (conf_done) conf_done_cnt++;
    if (irq) irq_cnt++;
  end

  task automatic wr(input int unsigned a, input word_t d);
    @(posedge clk);
    cfg_we <= 1; cfg_addr <= 8'(a); cfg_wdata <= d;
    @(posedge clk);
    cfg_we <= 0;
  endtask

  task automatic rd_check(input int unsigned a, input word_t e, input string what);
    @(posedge clk);
    cfg_addr <= 8'(a);
    @(negedge clk);
    checks++;
    if (cfg_rdata !== e) begin failures++; $display("%s: read %h expected %h", what, cfg_rdata, e); end
  endtask

  localparam word_t TAG = 64'h1234_5678_9abc_def0;

  initial begin
    int c0, i0, t;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; acc_done = 0; violation = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      wr(k, 64'h100 + 64'(k));
      wr(N + k, TAG);
    end
    wr(A_SRC, TAG); wr(A_DST, 64'hfeed); wr(A_FIRST, 64'd5); wr(A_LG, 64'd6);
    for (int k = 0; k < N; k++) rd_check(k, 64'h100 + 64'(k), "acc reg");
    for (int k = 0; k < N; k++) rd_check(N + k, TAG, "reg tag");
    rd_check(A_SRC, TAG, "src_tag"); rd_check(A_DST, 64'hfeed, "dst_tag");
    rd_check(A_FIRST, 64'd5, "first_tag"); rd_check(A_LG, 64'd6, "lg_off");
    checks++;
    if (acc_regs[1] != 64'h101 || first_tag != 5 || lg_off != 6 || dst_tag != 64'hfeed) begin
      failures++; $display("outputs do not follow registers");
    end
    // good start
    c0 = conf_done_cnt; i0 = irq_cnt;
    @(posedge clk); cfg_we <= 1; cfg_addr <= 8'(A_CMD); cfg_wdata <= 64'd1;
    @(posedge clk); cfg_we <= 0;
    @(negedge clk);
    checks++;
    if (!clear || conf_done) begin failures++; $display("clear not first"); end
    @(negedge clk);
    checks++;
    if (!conf_done) begin failures++; $display("conf_done not one cycle after clear"); end
    @(negedge clk);
    checks++;
    if (!enable) begin failures++; $display("not enabled while running"); end
    wr(0, 64'hdead);  // locked while busy
    rd_check(0, 64'h100, "write while busy");
    rd_check(A_ST, 64'b1000, "status busy");
    @(posedge clk); acc_done <= 1;
    @(posedge clk); acc_done <= 0;
    repeat (2) @(posedge clk);
    checks++;
    if (irq_cnt - i0 != 1 || conf_done_cnt - c0 != 1 || enable) begin
      failures++; $display("completion: irq %0d conf_done %0d", irq_cnt - i0, conf_done_cnt - c0);
    end
    rd_check(A_ST, 64'b0001, "status done");
    // wrong register tag: refused
    wr(N + 2, TAG ^ 64'h1);
    c0 = conf_done_cnt; i0 = irq_cnt;
    wr(A_CMD, 64'd1);
    repeat (4) @(posedge clk);
    checks++;
    if (conf_done_cnt != c0 || irq_cnt - i0 != 1) begin failures++; $display("bad register tag not refused"); end
    rd_check(A_ST, 64'b0101, "status register-tag violation");
    // input tag violation while running
    wr(N + 2, TAG);
    wr(A_CMD, 64'd1);
    repeat (3) @(posedge clk);
    @(posedge clk); violation <= 1;
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (acc_rst_n || enable) begin failures++; $display("accelerator not stopped"); end
    rd_check(A_ST, 64'b0011, "status input violation");
    repeat (5) @(posedge clk);
    checks++;
    if (acc_rst_n) begin failures++; $display("accelerator released early"); end
    violation <= 0;
    wr(A_CMD, 64'd1);
    @(negedge clk);
    checks++;
    if (!acc_rst_n) begin failures++; $display("accelerator not released on restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
