// mint_ctrl -- operation sequencer of the PE array.
//
// The precision of an inner product is set only by how many cycles it runs
// (the paper's zero-overhead dynamic precision): this controller counts the
// C(P) = 2P + 10 cycles of one 3x3 window at the precision P given with
// start, and derives from the cycle count every control of the array:
//   act_load  the cycle start is accepted (activations captured)
//   x_en      cycles 0 .. P-1: activation digits are fed
//   lrm_clr   low in cycles 0 .. 2P+1 only: the multipliers produce exactly
//             2P product digits, then are cleared (early termination)
//   out_valid cycles 6 .. 2P+9: the PE output digit of weight 2^(9-cycle)
//   out_last  cycle 2P+9, the last cycle of the window
// A new start is accepted when idle or in the last cycle of a window, so
// windows can follow each other with no gap.  P outside 2..8 is clamped.
// The paper gives the cycle count and that precision is chosen per layer;
// the handshake and the signal set are this design's choice.
module mint_ctrl
  import mint_pkg::*;
#(
  parameter int unsigned PMAX = WBITS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [3:0] prec,
  output logic       ready,      // start is accepted in this cycle
  output logic       busy,
  output logic       act_load,
  output logic       x_en,
  output logic       lrm_clr,
  output logic       out_valid,
  output logic       out_last,
  output logic [3:0] prec_q      // precision of the running window
);

  typedef enum logic {S_IDLE, S_RUN} state_t;

  localparam int unsigned CW = $clog2(2 * PMAX + 10 + 1);
  localparam logic [CW-1:0] FIRST_OUT = CW'(DELTA_MULT + TREE_LEVELS);

  state_t        state_q;
  logic [CW-1:0] cyc_q;
  logic [CW-1:0] last_cyc;     // C(P) - 1
  logic [3:0]    prec_c;

  always_comb begin
    prec_c = prec;
    if (prec < 4'(PMIN)) prec_c = 4'(PMIN);
    if (prec > 4'(PMAX)) prec_c = 4'(PMAX);
  end

  assign last_cyc  = CW'(2 * prec_q) + CW'(DELTA_MULT + DELTA_ADD * TREE_LEVELS - 1);
  assign busy      = (state_q == S_RUN);
  assign out_last  = busy && (cyc_q == last_cyc);
  assign ready     = !busy || out_last;
  assign act_load  = start && ready;
  assign x_en      = busy && (cyc_q < CW'(prec_q));
  assign lrm_clr   = !(busy && (cyc_q < CW'(2 * prec_q) + CW'(DELTA_MULT)));
  assign out_valid = busy && (cyc_q >= FIRST_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cyc_q   <= '0;
      prec_q  <= 4'(PMAX);
    end else if (act_load) begin
      state_q <= S_RUN;
      cyc_q   <= '0;
      prec_q  <= prec_c;
    end else if (out_last) begin
      state_q <= S_IDLE;
      cyc_q   <= '0;
    end else if (busy) begin
      cyc_q   <= cyc_q + CW'(1);
    end
  end

  // The precision must lie in the supported range when a window starts.
  a_prec: assert property (@(posedge clk) disable iff (!rst_n)
    act_load |-> (prec >= 4'(PMIN) && prec <= 4'(PMAX)));

endmodule
