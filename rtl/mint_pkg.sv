// mint_pkg -- types and constants shared by the MSDF (most-significant-digit-first)
// inner-product array.
//
// A radix-2 signed digit (SD) takes a value in {-1, 0, +1} and travels as a
// pair of wires (p, n) whose value is p - n; (1,1) is a legal encoding of 0.
// The constants below are the array dimensions and online delays of the design:
// 16 input-channel tiles, 8 output-channel tiles, 3x3 = 9 taps per processing
// element, INT8 as the widest precision, online delay 2 for both the multiplier
// and the adder, and ceil(log2(9)) = 4 adder-tree levels, so one inner product at
// precision P takes C(P) = 2P + 10 cycles.
package mint_pkg;

  typedef struct packed {
    logic p;  // +1 component
    logic n;  // -1 component
  } sd_t;

  localparam sd_t SD_ZERO = '{p: 1'b0, n: 1'b0};

  localparam int unsigned TAPS        = 9;   // 3x3 kernel
  localparam int unsigned T_N         = 16;  // input-channel tiling factor
  localparam int unsigned T_M         = 8;   // output-channel tiling factor
  localparam int unsigned WBITS       = 8;   // widest operand precision (INT8)
  localparam int unsigned PMIN        = 2;   // narrowest supported precision
  localparam int unsigned DELTA_MULT  = 2;   // online delay of the multiplier
  localparam int unsigned DELTA_ADD   = 2;   // online delay of the adder
  localparam int unsigned TREE_LEVELS = 4;   // ceil(log2(TAPS))

  // Signed value of one digit.
  function automatic int sd_val(sd_t d);
    return int'(d.p) - int'(d.n);
  endfunction

  // Cycles of one inner product at precision p: 2p + delta_mult + 4*delta_add.
  function automatic int unsigned cycles(int unsigned p);
    return 2 * p + DELTA_MULT + DELTA_ADD * TREE_LEVELS;
  endfunction

endpackage
