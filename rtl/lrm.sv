// lrm -- radix-2 left-to-right (online) serial-parallel multiplier.
//
// One operand, x, arrives one signed digit per cycle, most significant first;
// the other, Y, is held in parallel as a pair of bit vectors (y_p, y_n) with
// value Y = (y_p - y_n) / 2^(YW-1), so a two's-complement weight w maps to
// y_p = {0, w[YW-2:0]}, y_n = {w[YW-1], 0...}.  |Y| must not exceed 1.
// With x = sum x_j 2^-j the unit emits z = sum z_k 2^-k, one digit per cycle,
// starting DELTA = 2 cycles after the first x digit.
//
// Recurrence: v[j] = 2 w[j] + x_{j+delta} * Y * 2^-delta,
// z_{j+1} = SEL(v[j]), w[j+1] = v[j] - z_{j+1}.  This is the published
// recurrence; its text omits the 2^-delta factor, which the right-shift block
// of its drawing supplies and which keeps the residual bounded.  The datapath follows the
// blocks printed in the paper's figure of the multiplier: a selector forms
// +Y, -Y (one's complement plus a carry into the adder) or 0; an arithmetic
// right shift scales it by 2^-2; a 3:2 carry-save adder adds it to the
// residual held in two registers (REG WS, REG WC); a short carry-propagate
// adder (CPA) on the top five bits gives an estimate of v; SELM picks the
// digit; M subtracts it from the integer part; an arithmetic left shift
// forms 2w before the registers are written.
//
// Residual format (this design's choice): 3 integer bits and YW+1 fraction
// bits in two's complement, modulo 8.  |w| <= 3/4 and |v| <= 7/4 always hold.
// Selection on the estimate v^ (two fraction bits, truncated from both
// carry-save words, so v - 1/2 < v^ <= v):
//   z = +1 if v^ >= 1/4,  z = -1 if v^ <= -3/4,  otherwise 0.
//
// Timing: hold clr high while idle.  The first cycle with clr low is cycle 0
// and must carry x_1; the output z is combinational from the registers and
// the current x digit and is 0 in cycles 0 and 1; cycle t >= 2 carries
// z_{t-1}.  A P-digit x times a P-bit Y is exact after 2P digits, i.e. 2P+2
// cycles.  Raising clr terminates the operation early and clears the
// residual (output 0 while clr is high).
module lrm
  import mint_pkg::*;
#(
  parameter int unsigned YW    = WBITS,      // bits of the parallel operand
  parameter int unsigned DELTA = DELTA_MULT  // online delay
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,     // clear residual, force output digit to 0
  input  sd_t           x,       // serial operand digit
  input  logic [YW-1:0] y_p,     // parallel operand, positive part
  input  logic [YW-1:0] y_n,     // parallel operand, negative part
  output sd_t           z        // product digit
);

  localparam int unsigned IB = 3;              // integer bits of the residual
  localparam int unsigned FB = YW - 1 + DELTA; // fraction bits of the residual
  localparam int unsigned RW = IB + FB;        // residual width
  localparam int unsigned EW = IB + 2;         // estimate width (2 fraction bits)

  logic [RW-1:0] ws_q, wc_q;                   // REG WS / REG WC: hold 2*w
  logic [1:0]    t_q;                          // cycles since start, saturates at DELTA

  // Selector + arithmetic right shift: Y * 2^-DELTA lands on the residual LSB.
  logic signed [YW:0]   y_val;
  logic        [RW-1:0] y_ext, sel;
  logic                 cin;
  assign y_val = signed'({1'b0, y_p}) - signed'({1'b0, y_n});
  assign y_ext = RW'(y_val);  // sign extension

  always_comb begin
    sel = '0;
    cin = 1'b0;
    if (x.p && !x.n) begin
      sel = y_ext;
    end else if (x.n && !x.p) begin
      sel = ~y_ext;
      cin = 1'b1;
    end
  end

  // 3:2 carry-save adder: v = 2w + x*Y*2^-delta.
  logic [RW-1:0] vs, vc;
  always_comb begin
    vs = ws_q ^ wc_q ^ sel;
    vc = {((ws_q[RW-2:0] & wc_q[RW-2:0]) | (ws_q[RW-2:0] & sel[RW-2:0]) |
           (wc_q[RW-2:0] & sel[RW-2:0])), cin};
  end

  // CPA on the top bits and digit selection (SELM).
  logic signed [EW-1:0] est;
  logic                 out_en;
  assign est    = signed'(vs[RW-1 -: EW] + vc[RW-1 -: EW]);
  assign out_en = (t_q >= 2'(DELTA)) && !clr;

  always_comb begin
    z = SD_ZERO;
    if (out_en) begin
      z.p = (est >= 1);
      z.n = (est <= -3);
    end
  end

  // M: subtract the selected digit from the integer part; then shift left.
  // The top bit is shifted out, so only the lower RW-1 bits are formed.
  logic [RW-2:0] vs_m;
  always_comb begin
    vs_m = vs[RW-2:0];
    if (z.p) vs_m[RW-2:FB] = vs[RW-2:FB] - (IB-1)'(1);
    if (z.n) vs_m[RW-2:FB] = vs[RW-2:FB] + (IB-1)'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws_q <= '0;
      wc_q <= '0;
      t_q  <= '0;
    end else if (clr) begin
      ws_q <= '0;
      wc_q <= '0;
      t_q  <= '0;
    end else begin
      ws_q <= {vs_m, 1'b0};
      wc_q <= {vc[RW-2:0], 1'b0};
      if (t_q < 2'(DELTA)) t_q <= t_q + 2'd1;
    end
  end

  // |Y| <= 1 keeps the residual bounded.
  a_y_range: assert property (@(posedge clk) disable iff (!rst_n)
    (int'(y_val) <= (1 << (YW-1))) && (int'(y_val) >= -(1 << (YW-1))));

endmodule
