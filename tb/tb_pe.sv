// tb_pe -- self-checking test of the 9-tap MSDF processing element.
//
// Random weights are loaded, then random windows are run at random
// precisions P = 2..8, with the control sequence of the array controller:
// activation digits in cycles 0..P-1, multipliers released in cycles
// 0..2P+1.  The output digits of cycles 6 .. 2P+9 (weights 2^3 .. 2^-2P)
// must give sum_i x_i*Y_i exactly when the weights are quantised to P bits,
// and within 9 * 3/4 of the last digit otherwise.  Cycles 0..5 must carry no
// digit and the window must be complete after C(P) = 2P+10 cycles.
module tb_pe;
  import mint_pkg::*;

  localparam int N = 9;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              clr = 1'b1;
  sd_t               x [N];
  logic              w_we = 1'b0;
  logic [3:0]        w_tap = '0;
  logic signed [7:0] w_data = '0;
  sd_t               z;
  int                checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .clr, .x, .w_we, .w_tap, .w_data, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_window(int p, bit quant);
    logic signed [7:0] w [N];
    logic signed [7:0] a [N];
    longint ref_v, zi, diff;
    int cyc;
    // load weights
    for (int i = 0; i < N; i++) begin
      w[i] = 8'($urandom);
      if (quant) w[i] = w[i] & (8'hFF << (8 - p));
      a[i] = 8'($urandom);
      @(negedge clk);
      w_we = 1'b1; w_tap = 4'(i); w_data = w[i];
    end
    @(negedge clk);
    w_we = 1'b0;
    // reference: x_i = (a_i >>> (8-P)) / 2^P, Y_i = w_i / 128
    // sum * 2^2P * 128 = sum (a_i >>> (8-P)) * w_i * 2^P
    ref_v = 0;
    for (int i = 0; i < N; i++)
      ref_v += longint'(a[i] >>> (8 - p)) * longint'(w[i]) * (longint'(1) << p);
    zi = 0;
    cyc = 2 * p + 10;
    for (int t = 0; t < cyc; t++) begin
      @(negedge clk);
      clr = !(t < 2 * p + 2);
      for (int i = 0; i < N; i++) begin
        x[i] = SD_ZERO;
        if (t == 0)     x[i].n = a[i][7];
        else if (t < p) x[i].p = a[i][7 - t];
      end
      #4;
      if (t < 6) begin
        checks++;
        if (sd_val(z) != 0) failures++;
      end else begin
        zi = zi * 2 + sd_val(z);
      end
    end
    @(negedge clk);
    clr = 1'b1;
    for (int i = 0; i < N; i++) x[i] = SD_ZERO;
    diff = zi * 128 - ref_v;
    checks++;
    if (quant ? (diff != 0) : (diff > 864 || diff < -864)) begin
      failures++;
      $display("P=%0d quant=%0d got %0d want %0d", p, quant, zi * 128, ref_v);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) x[i] = SD_ZERO;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 1500; it++)
      run_window(int'($urandom_range(8, 2)), (it % 3) != 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
