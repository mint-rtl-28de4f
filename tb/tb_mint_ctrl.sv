// tb_mint_ctrl -- self-checking test of the array controller.
//
// For every precision P = 2..8, isolated and back-to-back windows are
// started.  Per window it checks: C(P) = 2P+10 busy cycles ending with
// out_last, P cycles of x_en (cycles 0..P-1), 2P+2 cycles with lrm_clr low
// (cycles 0..2P+1), 2P+4 cycles of out_valid (cycles 6..2P+9), the latched
// precision, and that a start in the last cycle begins the next window
// without a gap.
module tb_mint_ctrl;
  import mint_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  logic [3:0] prec = 4'd8;
  logic       ready, busy, act_load, x_en, lrm_clr, out_valid, out_last;
  logic [3:0] prec_q;
  int         checks = 0, failures = 0;

  mint_ctrl dut (.clk, .rst_n, .start, .prec, .ready, .busy, .act_load, .x_en,
                 .lrm_clr, .out_valid, .out_last, .prec_q);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Observe one window that starts in the next cycle; optionally request
  // the next window (precision pn) in its last cycle.
  task automatic observe(int p, bit chain, int pn);
    int n_busy = 0, n_x = 0, n_run = 0, n_val = 0, last_at = -1;
    for (int t = 0; t < 2 * p + 10; t++) begin
      @(negedge clk);
      start = 1'b0;
      #4;
      if (busy) n_busy++;
      if (x_en) begin n_x++; check(t < p, "x_en window"); end
      if (!lrm_clr) begin n_run++; check(t < 2 * p + 2, "lrm window"); end
      if (out_valid) begin n_val++; check(t >= 6, "out_valid window"); end
      if (out_last) last_at = t;
      check(prec_q == 4'(p), "latched precision");
      if (t == 2 * p + 9 && chain) begin
        // request the next window in the last cycle
        start = 1'b1;
        prec  = 4'(pn);
        #0;
        check(ready, "ready in last cycle");
      end
    end
    check(n_busy == 2 * p + 10, "busy cycles = C(P)");
    check(n_x == p, "x_en cycles = P");
    check(n_run == 2 * p + 2, "multiplier cycles = 2P+2");
    check(n_val == 2 * p + 4, "output digits = 2P+4");
    check(last_at == 2 * p + 9, "out_last in cycle C(P)-1");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 2; p <= 8; p++) begin
      // isolated window
      @(negedge clk);
      check(ready && !busy, "idle ready");
      start = 1'b1; prec = 4'(p);
      observe(p, 1'b0, 0);
      @(negedge clk);
      start = 1'b0;
      #4;
      check(!busy && lrm_clr && !out_valid, "idle after window");
      // back-to-back pair p then 10-p
      @(negedge clk);
      start = 1'b1; prec = 4'(p);
      observe(p, 1'b1, 10 - p);
      observe(10 - p, 1'b0, 0);
      @(negedge clk);
      start = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
