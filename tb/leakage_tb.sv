// leakage_tb: worst-case information leakage of the shelled GRAY and MEAN
// accelerators over burst sizes and tag offsets, on the small (128 x 128)
// workload.
//
// Information leakage is the share of the output that reaches memory before
// the shell notices an overwritten input. In the worst case the attacker
// overwrites the whole input and the first tag sits as far in as the tag
// offset allows (after T = 2**lg data words). Six units run side by side for
// tag offsets 2**10, 2**12 and 2**15 words: GRAY with bursts of 16, 128 and
// 1024 words (128 B to 8 KiB) and MEAN with bursts of 8, 16 and 128 words.
// Each measurement must equal the prediction from the accelerator's burst
// order; for GRAY it must also equal the closed form floor((T-1)/B)*B while
// the first tag lies inside the input. The status must report the violation
// unless the whole output leaked. Leakage must not grow with the burst size.
// The testbench counts how often zero, partial and full leakage were seen;
// each must happen.
module leakage_tb;
  import dift_pkg::*;

  localparam int unsigned NU = 6;
  localparam int unsigned BS [NU] = '{16, 128, 1024, 8, 16, 128};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic go;
  int unsigned f, lg;
  logic busy [NU];
  int unsigned leaked [NU], expected [NU], nout [NU];
  word_t status [NU];

  leak_unit #(.ACC(0), .BURST(16))   u_g0 (.clk, .rst_n, .go, .f, .lg, .busy(busy[0]), .leaked(leaked[0]), .expected(expected[0]), .nout(nout[0]), .status(status[0]));
  leak_unit #(.ACC(0), .BURST(128))  u_g1 (.clk, .rst_n, .go, .f, .lg, .busy(busy[1]), .leaked(leaked[1]), .expected(expected[1]), .nout(nout[1]), .status(status[1]));
  leak_unit #(.ACC(0), .BURST(1024)) u_g2 (.clk, .rst_n, .go, .f, .lg, .busy(busy[2]), .leaked(leaked[2]), .expected(expected[2]), .nout(nout[2]), .status(status[2]));
  leak_unit #(.ACC(1), .BURST(8))    u_m0 (.clk, .rst_n, .go, .f, .lg, .busy(busy[3]), .leaked(leaked[3]), .expected(expected[3]), .nout(nout[3]), .status(status[3]));
  leak_unit #(.ACC(1), .BURST(16))   u_m1 (.clk, .rst_n, .go, .f, .lg, .busy(busy[4]), .leaked(leaked[4]), .expected(expected[4]), .nout(nout[4]), .status(status[4]));
  leak_unit #(.ACC(1), .BURST(128))  u_m2 (.clk, .rst_n, .go, .f, .lg, .busy(busy[5]), .leaked(leaked[5]), .expected(expected[5]), .nout(nout[5]), .status(status[5]));

  int checks = 0, failures = 0;
  int n_zero = 0, n_partial = 0, n_full = 0;
  int unsigned lgs [3] = '{10, 12, 15};

  function automatic bit any_busy();
    foreach (busy[u]) if (busy[u]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    int unsigned t, e;
    go = 0; f = 0; lg = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    foreach (lgs[q]) begin
      lg = lgs[q]; t = 1 << lg; f = t;
      go = 1;
      @(posedge clk);
      go = 0;
      @(posedge clk);
      while (any_busy()) @(posedge clk);
      for (int u = 0; u < NU; u++) begin
        checks++;
        if (leaked[u] != expected[u]) begin
          failures++; $display("unit %0d T=%0d: leaked %0d, predicted %0d", u, t, leaked[u], expected[u]);
        end
        if (u < 3) begin
          e = (f <= nout[u]) ? ((f - 1) / BS[u]) * BS[u] : nout[u];
          checks++;
          if (leaked[u] != e) begin failures++; $display("GRAY T=%0d B=%0d: leaked %0d, closed form %0d", t, BS[u], leaked[u], e); end
        end
        checks++;
        if (status[u] != ((leaked[u] == nout[u]) ? 64'b0001 : 64'b0011)) begin
          failures++; $display("unit %0d T=%0d: status %b", u, t, status[u]);
        end
        if (leaked[u] == 0) n_zero++;
        else if (leaked[u] == nout[u]) n_full++;
        else n_partial++;
        $display("%s tag offset %6d words, burst %5d B: leakage %0d of %0d words (%0d.%02d %%)",
                 (u < 3) ? "GRAY" : "MEAN", t, BS[u] * 8, leaked[u], nout[u],
                 leaked[u] * 100 / nout[u], (leaked[u] * 10000 / nout[u]) % 100);
      end
      for (int u = 1; u < NU; u++)
        if (u != 3) begin
          checks++;
          if (leaked[u] * nout[u-1] > leaked[u-1] * nout[u]) begin failures++; $display("leakage grew with the burst size"); end
        end
    end
    checks++;
    if (n_zero == 0 || n_partial == 0 || n_full == 0) begin
      failures++; $display("missing case: zero %0d partial %0d full %0d", n_zero, n_partial, n_full);
    end
    $display("cases: zero=%0d partial=%0d full=%0d", n_zero, n_partial, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
