// store_shell_tb: self-checking testbench of the write side of the shell.
//
// Playing the accelerator, the testbench writes an output region in
// contiguous bursts of random length, for several first-tag locations and
// tag offsets, with random memory back-pressure. Afterwards every physical
// word of the region must hold either the data word expected at that place or
// dst_tag, following the layout rule computed here with a modulo (a position
// p is a tag when p == F or p > F and (p - F) is a multiple of T + 1), and the
// count of written tags must match. Finally `violation` is raised in the
// middle of a burst: the burst must close with zero words and no accelerator
// data may reach memory afterwards.
module store_shell_tb;
  import dift_pkg::*;

  localparam int unsigned DEPTH = 4096;
  localparam word_t DST_TAG = 64'h7777_0000_beef_0002;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, violation;
  word_t dst_tag;
  idx_t first_tag, tags_written;
  logic [4:0] lg_off;
  logic acc_req_valid, acc_req_ready, acc_data_valid, acc_data_ready;
  dma_req_t acc_req, mem_req;
  word_t acc_data, mem_data;
  logic mem_req_valid, mem_req_ready, mem_data_valid, mem_data_ready;

  store_shell dut (.*);

  logic rd_req_ready_u, rd_valid_u;
  word_t rd_data_u;
  dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(25)) u_mem (
    .clk, .rst_n,
    .rd_req_valid(1'b0), .rd_req_ready(rd_req_ready_u), .rd_req('0),
    .rd_valid(rd_valid_u), .rd_ready(1'b0), .rd_data(rd_data_u),
    .wr_req_valid(mem_req_valid), .wr_req_ready(mem_req_ready), .wr_req(mem_req),
    .wr_valid(mem_data_valid), .wr_ready(mem_data_ready), .wr_data(mem_data)
  );

  int checks = 0, failures = 0;

  function automatic bit is_tag_pos(int unsigned p, int unsigned f, int unsigned t);
    return (p == f) || (p > f && (p - f) % (t + 1) == 0);
  endfunction

  function automatic word_t dval(int unsigned i);
    return 64'hca00_0000_0000_0000 | 64'(i);
  endfunction

  task automatic burst(input int unsigned idx, len);
    @(posedge clk);
    acc_req_valid <= 1; acc_req <= '{index: idx, length: len};
    do @(posedge clk); while (!acc_req_ready);
    acc_req_valid <= 0;
    for (int unsigned k = 0; k < len; k++) begin
      acc_data_valid <= 1; acc_data <= dval(idx + k);
      do @(posedge clk); while (!acc_data_ready);
    end
    acc_data_valid <= 0;
  endtask

  initial begin
    int unsigned f, t, lg, idx, len, ndata, ntags, tw0, total, p;
    int unsigned lgs [3] = '{0, 3, 5};
    enable = 1; violation = 0; dst_tag = DST_TAG; first_tag = 0; lg_off = 0;
    acc_req_valid = 0; acc_req = '0; acc_data_valid = 0; acc_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (lgs[q]) begin
      lg = lgs[q]; t = 1 << lg; f = $urandom_range(t);
      first_tag = f; lg_off = 5'(lg);
      for (int unsigned a = 0; a < DEPTH; a++) u_mem.mem[a] = '0;
      tw0 = tags_written;
      total = 100 + $urandom_range(100);
      idx = 0;
      while (idx < total) begin
        len = 1 + $urandom_range(20);
        if (idx + len > total) len = total - idx;
        burst(idx, len);
        idx += len;
      end
      repeat (20) @(posedge clk);
      // walk the region
      ndata = 0; ntags = 0; p = 0;
      while (ndata < total) begin
        checks++;
        if (is_tag_pos(p, f, t)) begin
          ntags++;
          if (u_mem.mem[p] != DST_TAG) begin failures++; $display("pos %0d: tag missing", p); end
        end else begin
          if (u_mem.mem[p] != dval(ndata)) begin failures++; $display("pos %0d: %h", p, u_mem.mem[p]); end
          ndata++;
        end
        p++;
      end
      // the tag closing the last group is written when it directly follows
      if (is_tag_pos(p, f, t)) begin
        ntags++;
        checks++;
        if (u_mem.mem[p] != DST_TAG) begin failures++; $display("closing tag missing"); end
        p++;
      end
      checks++;
      if (u_mem.mem[p] != '0) begin failures++; $display("write past the region"); end
      checks++;
      if (tags_written - tw0 != ntags) begin
        failures++; $display("tags_written %0d expected %0d", tags_written - tw0, ntags);
      end
    end
    // violation in the middle of a burst
    for (int unsigned a = 0; a < DEPTH; a++) u_mem.mem[a] = '0;
    first_tag = 0; lg_off = 0;
    fork
      burst(0, 16);
      begin
        repeat (8) @(posedge clk);
        violation <= 1;
      end
    join_any
    repeat (60) @(posedge clk);
    checks++;
    if (u_mem.wr_left != 0) begin failures++; $display("burst not closed"); end
    begin
      int unsigned n_data = 0;
      for (int unsigned a = 0; a < 32; a++)
        if (u_mem.mem[a] != '0 && u_mem.mem[a] != DST_TAG) n_data++;
      checks++;
      if (n_data == 0 || n_data >= 16) begin failures++; $display("%0d data words after cut", n_data); end
    end
    checks++;
    if (acc_req_ready) begin failures++; $display("requests accepted during violation"); end
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
