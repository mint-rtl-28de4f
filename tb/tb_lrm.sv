// tb_lrm -- self-checking test of the online serial-parallel multiplier.
//
// For random precisions P = 2..8 a random P-digit signed-digit x is fed MSD
// first and multiplied by a random 8-bit weight.  The 2P output digits,
// collected in cycles 2 .. 2P+1, must equal x*Y exactly when the weight has
// only P significant bits, and lie within 3/4 of the last digit otherwise.
// Also checked: no digit in cycles 0 and 1 (online delay 2), and zero
// output while clr is held (early termination).
module tb_lrm;
  import mint_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       clr = 1'b1;
  sd_t        x = SD_ZERO;
  logic [7:0] y_p = '0, y_n = '0;
  sd_t        z;
  int         checks = 0, failures = 0;

  lrm dut (.clk, .rst_n, .clr, .x, .y_p, .y_n, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(int p, logic signed [7:0] w, bit quant);
    int  xd [8];
    longint xi, zi, ref_v, diff;
    for (int j = 0; j < p; j++) xd[j] = int'($urandom_range(2)) - 1;
    xi = 0;
    for (int j = 0; j < p; j++) xi = xi * 2 + xd[j];       // x * 2^P
    y_p = {1'b0, w[6:0]};
    y_n = {w[7], 7'b0};
    zi = 0;
    for (int t = 0; t < 2 * p + 2; t++) begin
      @(negedge clk);
      clr = 1'b0;
      x   = SD_ZERO;
      if (t < p) begin
        x.p = (xd[t] == 1);
        x.n = (xd[t] == -1);
      end
      #4;
      if (t < 2) begin
        checks++;
        if (sd_val(z) != 0) begin
          failures++;
          $display("digit before online delay, t=%0d", t);
        end
      end else begin
        zi = zi * 2 + sd_val(z);
      end
    end
    // zi = z * 2^2P ; x*Y*2^2P = xi * w * 2^P / 128.  Compare scaled by 128.
    ref_v = xi * longint'(w) * (longint'(1) << p);
    diff  = zi * 128 - ref_v;
    checks++;
    if (quant ? (diff != 0) : (diff > 96 || diff < -96)) begin
      failures++;
      $display("P=%0d x=%0d w=%0d z*2^2P=%0d ref*128=%0d", p, xi, w, zi, ref_v);
    end
    // Terminate: clr high, output must be 0.
    @(negedge clk);
    clr = 1'b1;
    x   = SD_ZERO;
    #4;
    checks++;
    if (sd_val(z) != 0) failures++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      int p;
      logic signed [7:0] w;
      bit quant;
      p     = int'($urandom_range(8, 2));
      w     = 8'($urandom);
      quant = (i % 2 == 0);
      if (i % 50 == 0) w = -8'sd128;        // |Y| = 1 corner
      if (quant) w = w & (8'hFF << (8 - p));
      run_one(p, w, quant);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
