// tb_act_serializer -- self-checking test of the activation serializer.
//
// Random windows are loaded and read out for P = 2..8 cycles.  The P digits
// of each tap, MSD first, must equal the P most significant bits of the
// activation as a signed integer (A >>> (8-P)); the first digit may only be
// 0 or -1 and the output must be the zero digit whenever en is low.
module tb_act_serializer;
  import mint_pkg::*;

  localparam int N = 9;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              load = 1'b0;
  logic signed [7:0] act [N];
  logic              en = 1'b0;
  sd_t               x [N];
  int                checks = 0, failures = 0;

  act_serializer dut (.clk, .rst_n, .load, .act, .en, .x);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) act[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      int p;
      longint v [N];
      logic signed [7:0] a [N];
      p = int'($urandom_range(8, 2));
      @(negedge clk);
      load = 1'b1;
      for (int i = 0; i < N; i++) begin
        a[i] = 8'($urandom);
        act[i] = a[i];
        v[i] = 0;
      end
      #4;
      checks++;
      for (int i = 0; i < N; i++) if (sd_val(x[i]) != 0) begin failures++; break; end
      for (int t = 0; t < p + 2; t++) begin
        @(negedge clk);
        load = 1'b0;
        for (int i = 0; i < N; i++) act[i] = 8'($urandom);  // must be ignored
        en = (t < p);
        #4;
        for (int i = 0; i < N; i++) begin
          if (t < p) begin
            v[i] = v[i] * 2 + sd_val(x[i]);
            if (t == 0 && sd_val(x[i]) > 0) begin
              checks++; failures++;
            end
          end else begin
            checks++;
            if (sd_val(x[i]) != 0) failures++;
          end
        end
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (v[i] != longint'(a[i] >>> (8 - p))) begin
          failures++;
          $display("P=%0d a=%0d got %0d", p, a[i], v[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
