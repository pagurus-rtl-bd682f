// load_shell_tb: self-checking testbench of the read side of the shell.
//
// The memory holds an interleaved region laid out by this testbench: a
// position p is a tag when p == F or p > F and (p - F) is a multiple of T + 1
// (computed with a modulo, independently of the shell's shift arithmetic).
// Playing the accelerator, the testbench issues random bursts for several
// first-tag locations and tag offsets and checks that (1) the request seen by
// memory starts at the data word's physical position and spans exactly the
// words up to the last data word plus a directly following tag, (2) only data
// words reach the accelerator, in order, (3) with no stalls the burst streams
// at one memory word per cycle, and (4) a corrupted tag raises `violation`,
// stops data at that tag and blocks further requests until `clear`.
module load_shell_tb;
  import dift_pkg::*;

  localparam int unsigned DEPTH = 4096;
  localparam word_t SRC_TAG = 64'h5a5a_0000_c0de_0001;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, clear, violation;
  word_t src_tag;
  idx_t first_tag;
  logic [4:0] lg_off;
  logic acc_req_valid, acc_req_ready, acc_data_valid, acc_data_ready;
  dma_req_t acc_req, mem_req;
  word_t acc_data, mem_data;
  logic mem_req_valid, mem_req_ready, mem_data_valid, mem_data_ready;

  load_shell dut (.*);

  // memory model: write channel unused
  logic wr_req_ready_u, wr_ready_u;
  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(0)) u_mem (
    .clk, .rst_n,
    .rd_req_valid(mem_req_valid), .rd_req_ready(mem_req_ready), .rd_req(mem_req),
    .rd_valid(mem_data_valid), .rd_ready(mem_data_ready), .rd_data(mem_data),
    .wr_req_valid(1'b0), .wr_req_ready(wr_req_ready_u), .wr_req('0),
    .wr_valid(1'b0), .wr_ready(wr_ready_u), .wr_data('0)
  );

  int checks = 0, failures = 0;
  int unsigned phys_of [DEPTH];     // logical data index -> physical position
  int unsigned ndata;

  function automatic bit is_tag_pos(int unsigned p, int unsigned f, int unsigned t);
    return (p == f) || (p > f && (p - f) % (t + 1) == 0);
  endfunction

  task automatic layout(input int unsigned f, input int unsigned lg);
    int unsigned t = 1 << lg;
    ndata = 0;
    for (int unsigned p = 0; p < DEPTH; p++) begin
      if (is_tag_pos(p, f, t)) u_mem.mem[p] = SRC_TAG;
      else begin
        u_mem.mem[p] = 64'hd000_0000_0000_0000 | 64'(ndata);
        phys_of[ndata] = p;
        ndata++;
      end
    end
  endtask

  // one accelerator read burst; returns the number of data words received
  task automatic burst(input int unsigned idx, len, input int unsigned f, t,
                       input bit timed, output int unsigned got);
    int unsigned exp_len, first_cyc, last_cyc, cyc;
    exp_len = phys_of[idx + len - 1] - phys_of[idx] + 1 +
              (is_tag_pos(phys_of[idx + len - 1] + 1, f, t) ? 1 : 0);
    @(posedge clk);
    acc_req_valid <= 1; acc_req <= '{index: idx, length: len};
    do @(posedge clk); while (!acc_req_ready);
    acc_req_valid <= 0;
    wait (mem_req_valid);
    checks++;
    if (mem_req.index != phys_of[idx] || mem_req.length != exp_len) begin
      failures++;
      $display("req (%0d,%0d) -> (%0d,%0d), expected (%0d,%0d)", idx, len,
               mem_req.index, mem_req.length, phys_of[idx], exp_len);
    end
    got = 0; cyc = 0; first_cyc = 0; last_cyc = 0;
    while (got < len && !violation) begin
      @(posedge clk);
      cyc++;
      if (mem_data_valid && mem_data_ready) begin
        if (first_cyc == 0) first_cyc = cyc;
        last_cyc = cyc;
      end
      if (acc_data_valid && acc_data_ready) begin
        checks++;
        if (acc_data != (64'hd000_0000_0000_0000 | 64'(idx + got))) begin
          failures++;
          $display("data %0d: %h", idx + got, acc_data);
        end
        got++;
      end
    end
    // let a trailing tag pass
    repeat (3) @(posedge clk);
    if (timed && !violation) begin
      checks++;
      if (last_cyc - first_cyc + 1 > exp_len) begin
        failures++;
        $display("burst of %0d memory words took %0d cycles", exp_len, last_cyc - first_cyc + 1);
      end
    end
  endtask

  initial begin
    int unsigned got, f, lg, idx, len, t, bad, n_before;
    enable = 1; clear = 0; src_tag = SRC_TAG; first_tag = 0; lg_off = 0;
    acc_req_valid = 0; acc_req = '0; acc_data_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // layouts: offset 1 (maximum tag density), 4, 64; several first-tag positions
    foreach (lg_list[q]) begin
      lg = lg_list[q]; t = 1 << lg; f = $urandom_range(t);
      first_tag = f; lg_off = 5'(lg);
      layout(f, lg);
      for (int b = 0; b < 12; b++) begin
        idx = $urandom_range(300);
        len = 1 + $urandom_range(b < 6 ? 7 : 150);
        burst(idx, len, f, t, 1'b1, got);
      end
      // contiguous bursts covering a region
      idx = 0;
      while (idx < 200) begin
        burst(idx, 16, f, t, 1'b1, got);
        idx += 16;
      end
    end
    // corrupt the tag that follows data word 40 in an offset-4 layout
    lg = 2; t = 4; f = 3; first_tag = f; lg_off = 5'(lg);
    layout(f, lg);
    bad = phys_of[40] + 1;
    while (!is_tag_pos(bad, f, t)) bad++;
    u_mem.mem[bad] = 64'hbad;
    burst(32, 32, f, t, 1'b0, got);
    checks++;
    if (!violation) begin failures++; $display("no violation raised"); end
    // exactly the data words placed before the bad tag reach the accelerator
    n_before = 0;
    for (int unsigned i = 32; i < 64; i++) if (phys_of[i] < bad) n_before++;
    checks++;
    if (got != n_before) begin failures++; $display("%0d words passed, expected %0d", got, n_before); end
    // no request is accepted while the violation stands
    @(posedge clk);
    acc_req_valid <= 1; acc_req <= '{index: 0, length: 4};
    repeat (10) @(posedge clk);
    checks++;
    if (acc_req_ready || mem_req_valid) begin failures++; $display("request taken after violation"); end
    acc_req_valid <= 0;
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    @(posedge clk);
    checks++;
    if (violation) begin failures++; $display("clear did not reset violation"); end
    // restart while a stopped long burst is still draining: the rest of the
    // old burst (with a second bad tag in it) is dropped unchecked and the
    // new run's first request waits for the end of the drain
    layout(f, lg);
    bad = phys_of[34] + 1;
    while (!is_tag_pos(bad, f, t)) bad++;
    u_mem.mem[bad] = 64'hbad;
    u_mem.mem[phys_of[150] + 1] = 64'hbad;
    u_mem.mem[phys_of[151] + 1] = 64'hbad;
    u_mem.mem[phys_of[152] + 1] = 64'hbad;
    u_mem.mem[phys_of[153] + 1] = 64'hbad;
    burst(32, 160, f, t, 1'b0, got);
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    begin
      int unsigned wait_cyc = 0, n_stale = 0, n_reviol = 0;
      @(posedge clk);
      while (!acc_req_ready) begin
        @(posedge clk);
        wait_cyc++;
        if (acc_data_valid) n_stale++;
        if (violation) n_reviol++;
      end
      checks++;
      if (wait_cyc < 100 || n_stale != 0 || n_reviol != 0) begin
        failures++;
        $display("restart during drain: waited %0d, stale words %0d, violation cycles %0d", wait_cyc, n_stale, n_reviol);
      end
    end
    u_mem.mem[bad] = SRC_TAG;
    burst(0, 8, f, t, 1'b1, got);
    checks++;
    if (got != 8 || violation) begin failures++; $display("no clean burst after restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned lg_list [3] = '{0, 2, 6};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
