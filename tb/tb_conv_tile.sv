// tb_conv_tile -- runs tiles of 3x3 convolution layers through the full array.
//
// A layer tile has 16 input channels of 5x5 activations and 8 output
// channels (3x3 output, no padding).  Every output pixel is one window of
// the array: the 16 x 9 activations around it enter the 16 columns, and
// PE(m, n) returns the contribution of input channel n to output channel m.
// The testbench sums the 16 partial results of each output channel, as a
// host would, and compares the 8 x 3 x 3 output with a direct convolution
// of the same P-bit operands.  The 9 windows of a tile run back to back.
// Layers are run at the precisions the per-layer assignment uses for the
// CNNs it was evaluated on (INT5, INT6, INT7, INT8), one layer each, with
// the weights quantised to the layer's precision.
module tb_conv_tile;
  import mint_pkg::*;

  localparam int TN = 16, TM = 8, NT = 9, H = 5, OH = 3;

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

  int checks = 0, failures = 0, layers = 0;

  logic signed [7:0] W [TM][TN][NT];
  logic signed [7:0] F [TN][H][H];

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int p);
    longint out_hw [TM][OH][OH];
    longint zi [TM][TN];
    int px = 0;
    // weights and input feature map
    for (int m = 0; m < TM; m++)
      for (int n = 0; n < TN; n++)
        for (int k = 0; k < NT; k++) begin
          W[m][n][k] = 8'($urandom) & (8'hFF << (8 - p));
          @(negedge clk);
          w_we = 1'b1; w_row = 3'(m); w_col = 4'(n); w_tap = 4'(k); w_data = W[m][n][k];
        end
    @(negedge clk);
    w_we = 1'b0;
    foreach (F[n, y, x]) F[n][y][x] = 8'($urandom);
    foreach (zi[m, n]) zi[m][n] = 0;
    // first window
    @(negedge clk);
    start = 1'b1; prec = 4'(p);
    for (int n = 0; n < TN; n++)
      for (int k = 0; k < NT; k++) act[n][k] = F[n][k / 3][k % 3];
    while (px < OH * OH) begin
      @(negedge clk);
      start = 1'b0;
      #4;
      if (out_valid)
        foreach (zi[m, n]) zi[m][n] = zi[m][n] * 2 + sd_val(z[m][n]);
      if (out_last) begin
        for (int m = 0; m < TM; m++) begin
          out_hw[m][px / OH][px % OH] = 0;
          for (int n = 0; n < TN; n++) out_hw[m][px / OH][px % OH] += zi[m][n];
        end
        foreach (zi[m, n]) zi[m][n] = 0;
        px++;
        if (px < OH * OH) begin
          start = 1'b1;
          for (int n = 0; n < TN; n++)
            for (int k = 0; k < NT; k++)
              act[n][k] = F[n][px / OH + k / 3][px % OH + k % 3];
        end
      end
    end
    // direct convolution, scaled like the array output (times 2^(P+7))
    for (int m = 0; m < TM; m++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OH; ox++) begin
          longint ref_v = 0;
          for (int n = 0; n < TN; n++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                ref_v += longint'(F[n][oy + ky][ox + kx] >>> (8 - p)) *
                         longint'(W[m][n][ky * 3 + kx]) * (longint'(1) << p);
          checks++;
          if (out_hw[m][oy][ox] * 128 != ref_v) begin
            failures++;
            $display("P=%0d out[%0d][%0d][%0d] got %0d want %0d", p, m, oy, ox,
                     out_hw[m][oy][ox] * 128, ref_v);
          end
        end
    layers++;
  endtask

  initial begin
    for (int n = 0; n < TN; n++) for (int k = 0; k < NT; k++) act[n][k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer(5);
    run_layer(6);
    run_layer(7);
    run_layer(8);
    checks++;
    if (layers != 4) failures++;
    $display("layer tiles run: %0d", layers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
