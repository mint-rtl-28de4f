// act_serializer -- feeds one input channel's 3x3 activation window to the PEs
// as MSD-first signed-digit streams.
//
// On load the NTAP two's-complement activations A_i are captured in shift
// registers.  While en is high one digit per tap is emitted per cycle and the
// registers shift left.  A WB-bit activation is read as the fraction
// x = A / 2^WB in [-1/2, 1/2); in signed-digit form its first digit (weight
// 2^-1) is minus the sign bit and the others are the remaining bits, so digit
// j is (p,n) = (0, A[WB-1]) for j = 1 and (A[WB-j], 0) after that.  Holding en
// high for only P cycles keeps the P most significant digits, which is how
// the design runs at precision P; with en low the output is the zero digit.
// The paper states only that activations enter MSD first as SD digit pairs;
// the two's-complement source format and this serializer are this design's.
//
// Timing: load in cycle -1 (or earlier), digits 1..P in cycles 0..P-1.
module act_serializer
  import mint_pkg::*;
#(
  parameter int unsigned NTAP = TAPS,
  parameter int unsigned WB   = WBITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic signed [WB-1:0] act [NTAP],
  input  logic                 en,
  output sd_t                  x [NTAP]
);

  logic [WB-1:0] sreg_q [NTAP];
  logic          first_q;          // next digit is the sign digit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NTAP); i++) sreg_q[i] <= '0;
      first_q <= 1'b0;
    end else if (load) begin
      for (int i = 0; i < int'(NTAP); i++) sreg_q[i] <= act[i];
      first_q <= 1'b1;
    end else if (en) begin
      for (int i = 0; i < int'(NTAP); i++) sreg_q[i] <= {sreg_q[i][WB-2:0], 1'b0};
      first_q <= 1'b0;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(NTAP); i++) begin
      x[i] = SD_ZERO;
      if (en) begin
        if (first_q) x[i].n = sreg_q[i][WB-1];
        else         x[i].p = sreg_q[i][WB-1];
      end
    end
  end

endmodule
