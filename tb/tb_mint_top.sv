// tb_mint_top -- end-to-end test of the full 8 x 16 PE array at its default
// size.
//
// All 128 x 9 weights are loaded through the weight port, then 3x3 windows
// of all 16 input channels are run.  For every window and every PE(m, n) the
// output digit stream is accumulated MSD first and compared with
// sum_tap (A >>> (8-P)) * W, computed here from the same numbers.  Mechanisms
// exercised and counted (each must occur at least once):
//   - every precision P = 2..8 (termination after C(P) = 2P+10 cycles,
//     checked cycle by cycle against the controller's out_last)
//   - a precision change between windows that follow with no idle cycle
//   - early termination with full 8-bit weights at P < 8 (result must lie
//     within 9 * 3/4 of the last digit of the exact truncated product sum)
//   - weight reload between windows
module tb_mint_top;
  import mint_pkg::*;

  localparam int TN = 16, TM = 8, NT = 9;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              w_we = 1'b0;
  logic [2:0]        w_row = '0;
  logic [3:0]        w_col = '0;
  logic [3:0]        w_tap = '0;
  logic signed [7:0] w_data = '0;
  logic              start = 1'b0;
  logic [3:0]        prec = 4'd8;
  logic signed [7:0] act [TN][NT];
  logic              ready, busy, out_valid, out_last;
  logic [3:0]        run_prec;
  sd_t               z [TM][TN];

  mint_top dut (.clk, .rst_n, .w_we, .w_row, .w_col, .w_tap, .w_data, .start,
                .prec, .act, .ready, .busy, .out_valid, .out_last, .run_prec, .z);

  int checks = 0, failures = 0;
  int n_prec [9];
  int n_chain_switch = 0, n_approx = 0, n_reload = 0;

  logic signed [7:0] W [TM][TN][NT];

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Load random weights, quantised to qbits significant bits (8 = none).
  task automatic load_weights(int qbits);
    for (int m = 0; m < TM; m++)
      for (int n = 0; n < TN; n++)
        for (int k = 0; k < NT; k++) begin
          logic signed [7:0] v;
          v = 8'($urandom);
          v = v & (8'hFF << (8 - qbits));
          W[m][n][k] = v;
          @(negedge clk);
          w_we = 1'b1; w_row = 3'(m); w_col = 4'(n); w_tap = 4'(k); w_data = v;
        end
    @(negedge clk);
    w_we = 1'b0;
    n_reload++;
  endtask

  // Run NW windows back to back with precisions ps[]; exact tells whether the
  // weights are quantised to every precision used.
  task automatic run_windows(int nw, int ps [4], bit exact);
    logic signed [7:0] A [4][TN][NT];
    longint zi [TM][TN];
    int w = 0, cyc = 0;
    for (int i = 0; i < nw; i++)
      for (int n = 0; n < TN; n++)
        for (int k = 0; k < NT; k++) A[i][n][k] = 8'($urandom);
    @(negedge clk);
    #4;
    checks++;
    if (!ready) failures++;
    start = 1'b1; prec = 4'(ps[0]); act = A[0];
    foreach (zi[m, n]) zi[m][n] = 0;
    while (w < nw) begin
      @(negedge clk);
      start = 1'b0;
      for (int n = 0; n < TN; n++)
        for (int k = 0; k < NT; k++) act[n][k] = 8'($urandom);  // ignored
      #4;
      checks++;
      if (!busy || run_prec != 4'(ps[w])) begin
        failures++;
        $display("window %0d not running at P=%0d", w, ps[w]);
      end
      if (out_valid)
        foreach (zi[m, n]) zi[m][n] = zi[m][n] * 2 + sd_val(z[m][n]);
      if (cyc < 6) begin
        checks++;
        if (out_valid) failures++;
      end
      if (out_last) begin
        int p = ps[w];
        checks++;
        if (cyc != 2 * p + 9) begin
          failures++;
          $display("window at P=%0d took %0d cycles, want %0d", p, cyc + 1, 2 * p + 10);
        end
        foreach (zi[m, n]) begin
          longint ref_v = 0, diff;
          for (int k = 0; k < NT; k++)
            ref_v += longint'(A[w][n][k] >>> (8 - p)) * longint'(W[m][n][k]) *
                     (longint'(1) << p);
          diff = zi[m][n] * 128 - ref_v;
          checks++;
          if (exact ? (diff != 0) : (diff > 864 || diff < -864)) begin
            failures++;
            if (failures < 10)
              $display("PE(%0d,%0d) P=%0d got %0d want %0d", m, n, p, zi[m][n] * 128, ref_v);
          end
        end
        n_prec[p]++;
        if (!exact) n_approx++;
        w++;
        cyc = 0;
        foreach (zi[m, n]) zi[m][n] = 0;
        if (w < nw) begin
          if (ps[w] != p) n_chain_switch++;
          start = 1'b1; prec = 4'(ps[w]); act = A[w];
        end
      end else begin
        cyc++;
      end
    end
    @(negedge clk);
    start = 1'b0;
  endtask

  initial begin
    int ps [4];
    for (int n = 0; n < TN; n++) for (int k = 0; k < NT; k++) act[n][k] = '0;
    for (int p = 0; p <= 8; p++) n_prec[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // INT8 down to INT2: one reload per precision, one isolated window, then
    // a back-to-back chain that switches precision (weights quantised to the
    // smallest precision of the chain).
    for (int p = 8; p >= 2; p--) begin
      load_weights(p);
      ps = '{p, 0, 0, 0};
      run_windows(1, ps, 1'b1);
      ps = '{p, (p < 8) ? p + 1 : p - 1, p, 0};
      if (p == 8) begin
        load_weights(7);
        ps = '{8, 7, 8, 0};
      end
      run_windows(3, ps, 1'b1);
    end
    // Early termination of full-precision weights.
    load_weights(8);
    ps = '{5, 3, 6, 2};
    run_windows(4, ps, 1'b0);

    for (int p = 2; p <= 8; p++) begin
      $display("windows at P=%0d: %0d", p, n_prec[p]);
      checks++;
      if (n_prec[p] == 0) failures++;
    end
    $display("precision switches between chained windows: %0d", n_chain_switch);
    $display("windows with full-precision weights terminated early: %0d", n_approx);
    $display("weight reloads: %0d", n_reload);
    checks += 3;
    if (n_chain_switch == 0) failures++;
    if (n_approx == 0) failures++;
    if (n_reload < 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
