// pagurus_full_tb: the three shelled accelerators at their default sizes
// (1024-word bursts and PLMs) running the "small" workload of the
// evaluation, a 128 x 128 input for each, with a tag every 64 data words.
//
// Per tile: one clean run whose every output value and output tag is
// checked against references computed here, one run with an overwritten
// input tag in the middle of the input that must be stopped with the
// input-violation status, and one run with a wrong register tag that must
// be refused, then a short clean run shows the tile works again. The same
// mechanisms as in the reduced end-to-end test are
// counted (except output rows split over store bursts, which a 128-word
// row in 1024-word bursts cannot show); all three tiles run concurrently on their own memory models.
// The MULTS run dominates the simulation time (about 4.5 million cycles).
module pagurus_full_tb;
  import dift_pkg::*;

  localparam int unsigned DEPTH = 65536, NT = 3;
  localparam int unsigned IN_BASE = 0, OUT_BASE = 16384;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cfg_we           [NT];
  logic [7:0]        cfg_addr         [NT];
  word_t             cfg_wdata        [NT];
  word_t             cfg_rdata        [NT];
  logic              irq              [NT];
  logic              mem_rd_req_valid [NT], mem_rd_req_ready [NT];
  dma_req_t          mem_rd_req       [NT];
  logic              mem_rd_valid     [NT], mem_rd_ready [NT];
  word_t             mem_rd_data      [NT];
  logic              mem_wr_req_valid [NT], mem_wr_req_ready [NT];
  dma_req_t          mem_wr_req       [NT];
  logic              mem_wr_valid     [NT], mem_wr_ready [NT];
  word_t             mem_wr_data      [NT];
  logic              violation        [NT];
  idx_t              tags_written     [NT];

  pagurus_top dut (.*);

  for (genvar t = 0; t < NT; t++) begin : g_mem
    dma_mem_model #(.DEPTH(DEPTH), .STALL_PCT(20)) u_mem (
      .clk, .rst_n,
      .rd_req_valid(mem_rd_req_valid[t]), .rd_req_ready(mem_rd_req_ready[t]), .rd_req(mem_rd_req[t]),
      .rd_valid(mem_rd_valid[t]), .rd_ready(mem_rd_ready[t]), .rd_data(mem_rd_data[t]),
      .wr_req_valid(mem_wr_req_valid[t]), .wr_req_ready(mem_wr_req_ready[t]), .wr_req(mem_wr_req[t]),
      .wr_valid(mem_wr_valid[t]), .wr_ready(mem_wr_ready[t]), .wr_data(mem_wr_data[t])
    );
  end

  function automatic word_t mget(int t, int unsigned a);
    case (t)
      0: return g_mem[0].u_mem.mem[a];
      1: return g_mem[1].u_mem.mem[a];
      default: return g_mem[2].u_mem.mem[a];
    endcase
  endfunction
  task automatic mset(int t, int unsigned a, word_t v);
    case (t)
      0: g_mem[0].u_mem.mem[a] = v;
      1: g_mem[1].u_mem.mem[a] = v;
      default: g_mem[2].u_mem.mem[a] = v;
    endcase
  endtask

  int checks = 0, failures = 0;
  // mechanism counters
  int n_clean = 0, n_tag_checked = 0, n_in_viol = 0, n_reg_viol = 0, n_out_tags = 0;
  int n_multi_load = 0, n_split_row = 0, n_acc_reset = 0, n_stall = 0;

  localparam word_t SRC_TAG [NT] = '{64'h1111_aaaa_0000_0001, 64'h2222_bbbb_0000_0002, 64'h3333_cccc_0000_0003};
  localparam word_t DST_TAG [NT] = '{64'h9999_1111_0000_0001, 64'h9999_2222_0000_0002, 64'h9999_3333_0000_0003};
  localparam int unsigned NREG [NT] = '{3, 4, 4};

  int unsigned phys_of [NT][DEPTH];
  int unsigned lay_f [NT], lay_t [NT];

  function automatic bit is_tag_pos(int unsigned p, int unsigned f, int unsigned t);
    return (p == f) || (p > f && (p - f) % (t + 1) == 0);
  endfunction

  // lay out the tile's buffer with tags and clear it
  task automatic prepare(int t, int unsigned f, int unsigned lg);
    int unsigned d = 0;
    lay_f[t] = f; lay_t[t] = 1 << lg;
    for (int unsigned p = 0; p < DEPTH; p++) begin
      if (is_tag_pos(p, f, 1 << lg)) mset(t, p, SRC_TAG[t]);
      else begin
        mset(t, p, '0);
        phys_of[t][d] = p;
        d++;
      end
    end
  endtask

  function automatic word_t din(int t, int unsigned i);  return mget(t, phys_of[t][IN_BASE + i]);  endfunction
  function automatic word_t dout(int t, int unsigned i); return mget(t, phys_of[t][OUT_BASE + i]); endfunction

  task automatic wr(int t, int unsigned a, word_t d);
    @(posedge clk); cfg_we[t] <= 1; cfg_addr[t] <= 8'(a); cfg_wdata[t] <= d;
    @(posedge clk); cfg_we[t] <= 0;
  endtask

  // program and run one invocation, return the status register
  task automatic invoke(int t, word_t r2, word_t r3, int unsigned lg, bit bad_reg_tag, output word_t status);
    int unsigned n = NREG[t];
    wr(t, 0, word_t'(IN_BASE)); wr(t, 1, word_t'(OUT_BASE)); wr(t, 2, r2);
    if (n > 3) wr(t, 3, r3);
    for (int k = 0; k < n; k++) wr(t, n + k, (bad_reg_tag && k == 0) ? ~SRC_TAG[t] : SRC_TAG[t]);
    wr(t, 2*n, SRC_TAG[t]); wr(t, 2*n + 1, DST_TAG[t]);
    wr(t, 2*n + 2, word_t'(lay_f[t])); wr(t, 2*n + 3, word_t'(lg));
    wr(t, 2*n + 4, 64'd1);
    @(posedge clk);
    while (!irq[t]) @(posedge clk);
    @(posedge clk);
    cfg_addr[t] <= 8'(2*n + 5);
    @(negedge clk);
    status = cfg_rdata[t];
  endtask

  function automatic word_t ref_gray(word_t px);
    longint unsigned s;
    s = longint'(px[15:0]) * 19595 + longint'(px[31:16]) * 38470 + longint'(px[47:32]) * 7471;
    return word_t'(s) << 16;
  endfunction
  function automatic word_t ref_mul(word_t a, word_t b);
    logic signed [127:0] p;
    p = $signed(a) * $signed(b);
    return p[95:32];
  endfunction

  // check the dst_tag positions inside the output span of nout words
  task automatic check_out_tags(int t, int unsigned nout);
    for (int unsigned p = phys_of[t][OUT_BASE]; p <= phys_of[t][OUT_BASE + nout - 1]; p++)
      if (is_tag_pos(p, lay_f[t], lay_t[t])) begin
        checks++;
        if (mget(t, p) != DST_TAG[t]) begin failures++; $display("tile %0d: output tag at %0d", t, p); end
      end
  endtask

  // one clean run of tile t with R x C data (GRAY: R*C pixels)
  task automatic clean_run(int t, int unsigned rows, cols, lg);
    word_t st, e;
    int unsigned f, nout, tw0, rb0, wb0;
    f = $urandom_range(1 << lg);
    prepare(t, f, lg);
    for (int unsigned i = 0; i < rows * cols; i++)
      mset(t, phys_of[t][IN_BASE + i],
           (t == 0) ? {16'h0, 16'($urandom), 16'($urandom), 16'($urandom)}
                    : word_t'(longint'($signed($urandom)) <<< 6));
    tw0 = tags_written[t];
    case (t)
      0: begin rb0 = g_mem[0].u_mem.rd_bursts; wb0 = g_mem[0].u_mem.wr_bursts; end
      1: begin rb0 = g_mem[1].u_mem.rd_bursts; wb0 = g_mem[1].u_mem.wr_bursts; end
      default: begin rb0 = g_mem[2].u_mem.rd_bursts; wb0 = g_mem[2].u_mem.wr_bursts; end
    endcase
    if (t == 0) invoke(t, word_t'(rows * cols), '0, lg, 1'b0, st);
    else        invoke(t, word_t'(rows), word_t'(cols), lg, 1'b0, st);
    checks++;
    if (st != 64'b0001) begin failures++; $display("tile %0d: status %b", t, st); end
    else n_clean++;
    case (t)
      0: begin
        nout = rows * cols;
        for (int unsigned i = 0; i < nout; i++) begin
          checks++;
          if (dout(t, i) != ref_gray(din(t, i))) begin failures++; $display("gray %0d", i); end
        end
      end
      1: begin
        nout = cols;
        for (int unsigned c = 0; c < cols; c++) begin
          longint s = 0;
          for (int unsigned r = 0; r < rows; r++) s += longint'(din(t, r * cols + c));
          checks++;
          if (dout(t, c) != word_t'(s / longint'(rows))) begin failures++; $display("mean %0d", c); end
        end
      end
      default: begin
        nout = rows * rows;
        for (int unsigned i = 0; i < rows; i++)
          for (int unsigned j = 0; j < rows; j++) begin
            e = '0;
            for (int unsigned c = 0; c < cols; c++) e += ref_mul(din(t, i * cols + c), din(t, j * cols + c));
            checks++;
            if (dout(t, i * rows + j) != e) begin failures++; $display("mults (%0d,%0d)", i, j); end
          end
      end
    endcase
    check_out_tags(t, nout);
    if (tags_written[t] != tw0) n_out_tags++;
    begin
      int unsigned rb, wb;
      case (t)
        0: begin rb = g_mem[0].u_mem.rd_bursts - rb0; wb = g_mem[0].u_mem.wr_bursts - wb0; end
        1: begin rb = g_mem[1].u_mem.rd_bursts - rb0; wb = g_mem[1].u_mem.wr_bursts - wb0; end
        default: begin rb = g_mem[2].u_mem.rd_bursts - rb0; wb = g_mem[2].u_mem.wr_bursts - wb0; end
      endcase
      if (t != 0 && rb > wb) n_multi_load++;
      if (t == 2 && wb > rows) n_split_row++;
    end
  endtask

  // attacked run: overwrite one input tag in the middle of the input
  task automatic attack_run(int t, int unsigned rows, cols, lg);
    word_t st;
    int unsigned f, bad;
    f = $urandom_range(1 << lg);
    prepare(t, f, lg);
    for (int unsigned i = 0; i < rows * cols; i++) mset(t, phys_of[t][IN_BASE + i], word_t'(i + 1));
    bad = phys_of[t][IN_BASE + (rows * cols) / 2];
    while (!is_tag_pos(bad, f, 1 << lg)) bad++;
    mset(t, bad, 64'h4141_4141_4141_4141);
    if (t == 0) invoke(t, word_t'(rows * cols), '0, lg, 1'b0, st);
    else        invoke(t, word_t'(rows), word_t'(cols), lg, 1'b0, st);
    checks++;
    if (st != 64'b0011) begin failures++; $display("tile %0d: attack not detected, status %b", t, st); end
    else n_in_viol++;
  endtask

  task automatic reg_attack(int t);
    word_t st;
    prepare(t, 0, 0);
    invoke(t, word_t'(4), word_t'(4), 0, 1'b1, st);
    checks++;
    if (st != 64'b0101) begin failures++; $display("tile %0d: register tag attack, status %b", t, st); end
    else n_reg_viol++;
  endtask

  // after the attacks the tile must work again: a clean run on a small input
  task automatic recover(int t);
    int c0 = n_clean;
    clean_run(t, 3, 5, 1);
    checks++;
    if (n_clean != c0 + 1) begin failures++; $display("tile %0d did not recover", t); end
    else n_acc_reset++;   // the stopped accelerator was reset and restarted
  endtask

  // tag words consumed and checked by the load shells
  always @(posedge clk) begin
    if (mem_rd_valid[0] && mem_rd_ready[0] && is_tag_pos(g_mem[0].u_mem.rd_ptr, lay_f[0], lay_t[0])) n_tag_checked++;
    if (mem_rd_valid[1] && mem_rd_ready[1] && is_tag_pos(g_mem[1].u_mem.rd_ptr, lay_f[1], lay_t[1])) n_tag_checked++;
    if (mem_rd_valid[2] && mem_rd_ready[2] && is_tag_pos(g_mem[2].u_mem.rd_ptr, lay_f[2], lay_t[2])) n_tag_checked++;
  end

  // back-pressure seen by the shells
  always @(posedge clk)
    for (int t = 0; t < NT; t++)
      if (mem_rd_req_valid[t] && !mem_rd_req_ready[t] || mem_wr_valid[t] && !mem_wr_ready[t]) n_stall++;

  task automatic tile_seq(int t);
    case (t)
      0: begin clean_run(0, 128, 128, 6); attack_run(0, 128, 128, 6); reg_attack(0); recover(0); end
      1: begin clean_run(1, 128, 128, 6); attack_run(1, 128, 128, 6); reg_attack(1); recover(1); end
      default: begin clean_run(2, 128, 128, 6); attack_run(2, 128, 128, 6); reg_attack(2); recover(2); end
    endcase
  endtask

  initial begin
    for (int t = 0; t < NT; t++) begin cfg_we[t] = 0; cfg_addr[t] = 0; cfg_wdata[t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      tile_seq(0);
      tile_seq(1);
      tile_seq(2);
    join
    $display("mechanisms: clean=%0d tag_checked=%0d input_violation=%0d register_violation=%0d output_tags=%0d multi_load=%0d split_row=%0d acc_reset=%0d stall_cycles=%0d",
             n_clean, n_tag_checked, n_in_viol, n_reg_viol, n_out_tags, n_multi_load, n_split_row, n_acc_reset, n_stall);
    foreach (mech[q]) begin
      checks++;
      if (mech[q] == 0) begin failures++; $display("mechanism %0d never happened", q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a 128-word output row fits one 1024-word store burst, so split rows
  // cannot occur at this size and are only reported
  int mech [8];
  always_comb mech = '{n_clean, n_tag_checked, n_in_viol, n_reg_viol, n_out_tags,
                       n_multi_load, n_acc_reset, n_stall};

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
