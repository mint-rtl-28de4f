// lra -- radix-2 left-to-right (online) signed-digit adder, online delay 2.
//
// Adds two MSD-first digit streams x and y (digits in {-1,0,1}, pairs (p,n))
// and produces their sum as a digit stream, built, as in the paper, from two
// full adders and a few one-digit registers:
//   upper FA:  x.p + y.p + ~x.n  = 2h + g         (transfer h, interim g)
//   lower FA:  g[j] + h[j+1] + ~y.n[j] = 2t + s
//   output:    z[j-1] = t[j] - (1 - s[j-1])       z.p = t, z.n = ~s(delayed)
// The interim g and y.n are registered one cycle so that the lower FA sees
// position j together with the transfer from position j+1; s is registered
// once more to meet the transfer t of the next position.
//
// Scaling and timing: with x_j, y_j presented in cycle j-1, the sum digit of
// weight 2^-k appears at the combinational output in cycle k+1, for k >= 0.
// So a digit of a given weight leaves 2 cycles after it entered, and the sum
// stream carries one extra leading digit (weight 2^0 for inputs that start at
// 2^-1) one cycle after the first input.  When both inputs end (all further
// digits 0), the sum stream ends at the same weight: no clear is needed
// between operations separated by two idle cycles.
//
// The paper's figure also draws registers on both outputs (one on z-, two on
// z+); an output register would add a cycle per adder and break the stated
// delta_add = 2, so here the output is taken combinationally and only the
// s path carries its single required register.  Which lower-FA output is the
// carry is not printed; this follows the algebra above.
module lra
  import mint_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  sd_t  x,
  input  sd_t  y,
  output sd_t  z
);

  logic h, g, t, s;
  logic g_q, yn_q, s_q;

  assign {h, g} = {1'b0, x.p} + {1'b0, y.p} + {1'b0, ~x.n};
  assign {t, s} = {1'b0, g_q} + {1'b0, h} + {1'b0, ~yn_q};

  assign z.p = t;
  assign z.n = ~s_q;

  // Reset state equals the state reached after a run of zero digits.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q  <= 1'b1;
      yn_q <= 1'b0;
      s_q  <= 1'b0;
    end else begin
      g_q  <= g;
      yn_q <= y.n;
      s_q  <= s;
    end
  end

endmodule
