// lra_tree -- online adder tree that sums N_IN digit streams.
//
// Level by level, neighbouring streams are paired into an lra; an odd stream
// left over at a level is passed through a two-cycle digit delay so that it
// stays aligned with the adder outputs (an adder moves a digit of given
// weight by DELTA_ADD = 2 cycles).  For the paper's 9 taps this gives
// ceil(log2 9) = 4 levels: 9 -> 5 -> 3 -> 2 -> 1 streams, 8 adders and
// 3 pass-through delays.  The paper gives only the level count; the pairing
// and the pass-through delays are this design's choice.
//
// Scaling and timing: each level doubles the weight of the stream (the sum of
// two values below 1 in magnitude can reach 2), so with inputs whose first
// digit has weight 2^-1 in cycle c, the output digit of weight 2^-k appears
// in cycle c + k - 1 + 2*LEVELS, and the first, weight 2^(LEVELS-1), in cycle
// c + LEVELS.  The output is exactly the sum of the input streams.
module lra_tree
  import mint_pkg::*;
#(
  parameter int unsigned N_IN = TAPS
) (
  input  logic clk,
  input  logic rst_n,
  input  sd_t  in [N_IN],
  output sd_t  out
);

  localparam int unsigned LEVELS = $clog2(N_IN);

  // Number of streams at level l (level 0 = the inputs).
  function automatic int unsigned width_at(int unsigned l);
    int unsigned w = N_IN;
    for (int unsigned lv = 0; lv < l; lv++) w = (w + 1) / 2;
    return w;
  endfunction

  // Each level has its own stream array; level l reads level l-1.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NPREV = width_at(l - 1);
    localparam int unsigned NCUR  = width_at(l);
    sd_t prev [NPREV];
    sd_t cur  [NCUR];

    for (genvar i = 0; i < NPREV; i++) begin : g_prev
      if (l == 1) begin : g_first
        assign prev[i] = in[i];
      end else begin : g_next
        assign prev[i] = g_lvl[l-1].cur[i];
      end
    end

    for (genvar k = 0; k < NCUR; k++) begin : g_node
      if (2 * k + 1 < NPREV) begin : g_add
        lra u_lra (
          .clk  (clk),
          .rst_n(rst_n),
          .x    (prev[2*k]),
          .y    (prev[2*k+1]),
          .z    (cur[k])
        );
      end else begin : g_pass
        sd_t d1_q, d2_q;
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            d1_q <= SD_ZERO;
            d2_q <= SD_ZERO;
          end else begin
            d1_q <= prev[2*k];
            d2_q <= d1_q;
          end
        end
        assign cur[k] = d2_q;
      end
    end
  end

  assign out = g_lvl[LEVELS].cur[0];

endmodule
