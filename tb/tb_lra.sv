// tb_lra -- self-checking test of the online signed-digit adder.
//
// Two random L-digit streams (weights 2^-1 .. 2^-L) enter in cycles 0..L-1.
// The sum digit of weight 2^-k must appear in cycle k+1 (online delay 2,
// with one extra leading digit of weight 2^0 in cycle 1), the digits must
// add up to x + y exactly, and the stream must be zero after weight 2^-L.
// Operations follow each other with two idle cycles and no reset.
module tb_lra;
  import mint_pkg::*;

  localparam int L = 12;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  sd_t  x = SD_ZERO, y = SD_ZERO;
  sd_t  z;
  int   checks = 0, failures = 0;

  lra dut (.clk, .rst_n, .x, .y, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_t mk(int v);
    sd_t d;
    d.p = (v == 1);
    d.n = (v == -1);
    // zero is sometimes sent as (1,1)
    if (v == 0 && ($urandom_range(3) == 0)) begin d.p = 1'b1; d.n = 1'b1; end
    return d;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      int xd [L], yd [L];
      longint xi, yi, zi;
      xi = 0; yi = 0; zi = 0;
      for (int j = 0; j < L; j++) begin
        xd[j] = int'($urandom_range(2)) - 1;
        yd[j] = int'($urandom_range(2)) - 1;
        xi = xi * 2 + xd[j];
        yi = yi * 2 + yd[j];
      end
      for (int t = 0; t < L + 4; t++) begin
        @(negedge clk);
        x = (t < L) ? mk(xd[t]) : SD_ZERO;
        y = (t < L) ? mk(yd[t]) : SD_ZERO;
        #4;
        if (t == 0) begin
          checks++;
          if (sd_val(z) != 0) failures++;
        end else if (t <= L + 1) begin
          zi = zi * 2 + sd_val(z);        // weights 2^0 .. 2^-L
        end else begin
          checks++;
          if (sd_val(z) != 0) begin
            failures++;
            $display("nonzero digit after end, t=%0d", t);
          end
        end
      end
      checks++;
      if (zi != xi + yi) begin
        failures++;
        $display("sum mismatch: %0d + %0d -> %0d", xi, yi, zi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
