// tb_lra_tree -- self-checking test of the 9-input online adder tree.
//
// Nine random L-digit streams (weights 2^-1 .. 2^-L) enter in cycles
// 0..L-1.  The output digit of weight 2^-k must appear in cycle k + 7
// (4 levels of delay 2), starting with weight 2^3 in cycle 4; the digits
// must sum to the exact total, and the output must be zero afterwards.
module tb_lra_tree;
  import mint_pkg::*;

  localparam int L = 16;
  localparam int N = 9;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  sd_t  in [N];
  sd_t  out;
  int   checks = 0, failures = 0;

  lra_tree dut (.clk, .rst_n, .in, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) in[i] = SD_ZERO;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      int     d [N][L];
      longint total, zi;
      total = 0; zi = 0;
      for (int i = 0; i < N; i++) begin
        longint v;
        v = 0;
        for (int j = 0; j < L; j++) begin
          d[i][j] = int'($urandom_range(2)) - 1;
          if (it % 100 == 1) d[i][j] = (j == 0) ? 1 : 0;  // every input at 1/2
          v = v * 2 + d[i][j];
        end
        total += v;
      end
      for (int t = 0; t < L + 12; t++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          in[i] = SD_ZERO;
          if (t < L) begin
            in[i].p = (d[i][t] == 1);
            in[i].n = (d[i][t] == -1);
          end
        end
        #4;
        if (t < 4 || t > L + 7) begin
          checks++;
          if (sd_val(out) != 0) begin
            failures++;
            $display("unexpected digit at t=%0d", t);
          end
        end else begin
          zi = zi * 2 + sd_val(out);      // weights 2^3 .. 2^-L
        end
      end
      checks++;
      if (zi != total) begin
        failures++;
        $display("tree sum mismatch: got %0d want %0d", zi, total);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
