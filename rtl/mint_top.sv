// mint_top -- the tiled MSDF convolution array: T_M x T_N processing elements.
//
// PE(m, n) computes the 3x3 window of input channel n for output channel m
// (paper: input tiling T_N = 16, output tiling T_M = 8, 128 PEs, common
// clock and reset).  One act_serializer per input channel turns that
// channel's nine activations into digit streams shared by the T_M PEs of its
// column; each PE holds its own nine weights.  A single mint_ctrl sequences
// all PEs in lock step, so every window of the array runs C(P) = 2P + 10
// cycles at the precision P given with start.
//
// Interface:
//   weights   w_we, w_row (m), w_col (n), w_tap, w_data: one weight per cycle
//   window    start, prec and act[n][tap] (two's complement, WBITS bits),
//             accepted when ready is high; act is captured in that cycle
//   results   z[m][n]: PE output digit streams, valid while out_valid is high;
//             the digit in the k-th valid cycle (k = 0 ..) has weight 2^(3-k),
//             the last (weight 2^-2P) comes with out_last
// Value convention: activation A reads as A / 2^WBITS, weight W as
// W / 2^(WBITS-1), so z[m][n] = sum_tap A*W / 2^(2*WBITS-1), exact when the
// weights are quantised to P bits (their low WBITS-P bits zero).
// Summing the T_N partial results of an output channel, and the buffers that
// feed the array, are not described in the paper and are left outside.
module mint_top
  import mint_pkg::*;
#(
  parameter int unsigned TN   = T_N,
  parameter int unsigned TM   = T_M,
  parameter int unsigned NTAP = TAPS,
  parameter int unsigned WB   = WBITS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight load
  input  logic                         w_we,
  input  logic [$clog2(TM)-1:0]        w_row,
  input  logic [$clog2(TN)-1:0]        w_col,
  input  logic [$clog2(NTAP)-1:0]      w_tap,
  input  logic signed [WB-1:0]         w_data,
  // window start
  input  logic                         start,
  input  logic [3:0]                   prec,
  input  logic signed [WB-1:0]         act [TN][NTAP],
  output logic                         ready,
  output logic                         busy,
  // results
  output logic                         out_valid,
  output logic                         out_last,
  output logic [3:0]                   run_prec,   // precision of the running window
  output sd_t                          z [TM][TN]
);

  logic       act_load, x_en, lrm_clr;

  mint_ctrl #(.PMAX(WB)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .prec     (prec),
    .ready    (ready),
    .busy     (busy),
    .act_load (act_load),
    .x_en     (x_en),
    .lrm_clr  (lrm_clr),
    .out_valid(out_valid),
    .out_last (out_last),
    .prec_q   (run_prec)
  );

  sd_t xs [TN][NTAP];  // digit streams of each input channel

  for (genvar n = 0; n < TN; n++) begin : g_col
    act_serializer #(.NTAP(NTAP), .WB(WB)) u_ser (
      .clk  (clk),
      .rst_n(rst_n),
      .load (act_load),
      .act  (act[n]),
      .en   (x_en),
      .x    (xs[n])
    );
  end

  for (genvar m = 0; m < TM; m++) begin : g_row
    for (genvar n = 0; n < TN; n++) begin : g_pe
      logic we;
      assign we = w_we && (32'(w_row) == m) && (32'(w_col) == n);
      pe #(.NTAP(NTAP), .WB(WB)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (lrm_clr),
        .x     (xs[n]),
        .w_we  (we),
        .w_tap (w_tap),
        .w_data(w_data),
        .z     (z[m][n])
      );
    end
  end

endmodule
