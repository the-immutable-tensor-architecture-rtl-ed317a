// csd_const_mult: multiply a signed activation by one weight that is fixed
// when the chip is made.
//
// The weight W is a parameter, not an input. At elaboration its canonical
// signed digit (CSD) form is computed (ita_pkg::csd_pos/csd_neg), and the
// product is the sum of the activation shifted by each non-zero digit
// position, added for a +1 digit and subtracted for a -1 digit:
//     p = sum_i c_i * (x << s_i),  c_i in {-1, +1}.
// Shifts are wiring; only the adds/subtracts become logic. A weight of zero
// has no digits, so the multiplier disappears (zero-weight pruning): p is 0
// and nothing reads x. Examples: W = 7 is 8 - 1 (one subtractor), W = 3 is
// 4 - 1, W = 4 is a plain shift.
//
// The CSD shift-add structure and the pruning of zero weights follow the
// paper. The integer weight code (q/8, INT4) and the output width are this
// design's choices. Purely combinational, no clock.
module csd_const_mult
  import ita_pkg::*;
#(
  parameter int IN_W = ACT_W,                         // activation width
  parameter logic signed [WGT_W-1:0] W = 4'sd7,       // hardwired weight code
  parameter int OUT_W = IN_W + WGT_W                  // exact product width
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] p
);

  localparam logic [CSD_DIGITS-1:0] POS = csd_pos(int'(W));
  localparam logic [CSD_DIGITS-1:0] NEG = csd_neg(int'(W));

  logic signed [OUT_W-1:0] xe;
  assign xe = OUT_W'(x);   // sign-extended activation

  always_comb begin
    p = '0;
    for (int i = 0; i < CSD_DIGITS; i++) begin
      if (POS[i]) p = p + (xe <<< i);
      if (NEG[i]) p = p - (xe <<< i);
    end
  end

endmodule
