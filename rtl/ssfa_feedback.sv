// ssfa_feedback: selects the multiplier's reuse operand for the current
// training phase and forms the sign-symmetric feedback value.
//
// Phase 2 of sign-symmetric feedback alignment replaces the transposed
// weight W^T by sign(W) * |B|, where B is a fixed random matrix: the sign is
// taken from the weight, the magnitude from the stored feedback. Phases 1
// and 3 use the stored reuse value (weight or error gradient) unchanged.
// Combinational. The output is one bit wider than the inputs because |B| is
// an unsigned 4-bit magnitude (0..15) and can carry either sign.
module ssfa_feedback
  import eg_pkg::*;
(
  input  phase_e                phase,
  input  logic signed [RW-1:0]  w,
  input  logic [RW-1:0]         b_mag,
  output logic signed [RW:0]    operand
);
  always_comb begin
    if (phase == PH_BWD) begin
      if (w == '0)        operand = '0;
      else if (w[RW-1])   operand = -$signed({1'b0, b_mag});
      else                operand =  $signed({1'b0, b_mag});
    end else begin
      operand = (RW+1)'(w);
    end
  end
endmodule
