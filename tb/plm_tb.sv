// plm_tb: self-checking testbench of the private local memory.
//
// It writes random words at every address and reads them back (one cycle of
// read latency, read and write in the same cycle at different addresses),
// then pulses `clr` and checks that `clr_busy` lasts exactly DEPTH cycles,
// that writes during the sweep are ignored and that every word reads zero
// afterwards.
module plm_tb;
  localparam int unsigned DEPTH = 32, W = 64, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr, clr_busy, we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];

  plm #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    int busy_cycles;
    clr = 0; we = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = {$urandom, $urandom};
      @(posedge clk); we <= 1; waddr <= AW'(a); wdata <= model[a];
    end
    @(posedge clk); we <= 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(posedge clk); raddr <= AW'(a);
      @(negedge clk); @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d: %h", a, rdata); end
    end
    @(posedge clk); clr <= 1;
    @(posedge clk); clr <= 0; we <= 1; waddr <= 3; wdata <= '1;
    busy_cycles = 0;
    @(negedge clk);
    while (clr_busy) begin busy_cycles++; @(negedge clk); end
    we <= 0;
    checks++;
    if (busy_cycles != DEPTH) begin failures++; $display("clear took %0d cycles", busy_cycles); end
    for (int a = 0; a < DEPTH; a++) begin
      @(posedge clk); raddr <= AW'(a);
      @(negedge clk); @(negedge clk);
      checks++;
      if (rdata !== '0) begin failures++; $display("addr %0d not cleared", a); end
    end
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
