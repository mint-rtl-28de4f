// pe -- MSDF processing element: 9-tap inner product z = sum_i x_i * Y_i.
//
// One PE computes a 3x3 convolution window of one input channel for one
// output channel.  As in the paper it is nine serial-parallel online
// multipliers (lrm) whose product streams are summed by a four-level online
// adder tree (lra_tree).  The activation digits x_i arrive serially, MSD
// first; the nine weights are held in parallel registers (the multipliers'
// Y operand), loaded one at a time through w_we / w_tap / w_data.
//
// Number formats (this design's choice): a weight is a WBITS-bit two's-
// complement integer W read as the fraction Y = W / 2^(WBITS-1) in [-1, 1);
// an activation digit stream x = sum x_j 2^-j.  The output stream carries
// the inner product with digit weights 2^3 ... 2^-2P.
//
// Timing: with clr low from cycle 0 (x_1 at the inputs in cycle 0) the
// output digit of weight 2^-k appears in cycle k + 9, the first one (2^3) in
// cycle 6, the last one (2^-2P) in cycle 2P + 9: C(P) = 2P + 10 cycles per
// window, matching Eq. (1) of the paper.  clr must be raised after cycle
// 2P + 1 so the multipliers stop after their 2P product digits (the early
// termination that sets the precision), and held until the next window.
module pe
  import mint_pkg::*;
#(
  parameter int unsigned NTAP = TAPS,
  parameter int unsigned WB   = WBITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  sd_t                       x [NTAP],
  input  logic                      w_we,
  input  logic [$clog2(NTAP)-1:0]   w_tap,
  input  logic signed [WB-1:0]      w_data,
  output sd_t                       z
);

  logic signed [WB-1:0] w_q [NTAP];   // parallel operand registers
  sd_t                  prod [NTAP];  // multiplier output streams

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NTAP); i++) w_q[i] <= '0;
    end else if (w_we) begin
      w_q[w_tap] <= w_data;
    end
  end

  for (genvar i = 0; i < NTAP; i++) begin : g_mul
    // Two's complement as a signed-digit vector: the sign bit is a -1 digit.
    logic [WB-1:0] y_p, y_n;
    assign y_p = {1'b0, w_q[i][WB-2:0]};
    assign y_n = {w_q[i][WB-1], {(WB-1){1'b0}}};

    lrm #(.YW(WB)) u_lrm (
      .clk  (clk),
      .rst_n(rst_n),
      .clr  (clr),
      .x    (x[i]),
      .y_p  (y_p),
      .y_n  (y_n),
      .z    (prod[i])
    );
  end

  lra_tree #(.N_IN(NTAP)) u_tree (
    .clk  (clk),
    .rst_n(rst_n),
    .in   (prod),
    .out  (z)
  );

endmodule
