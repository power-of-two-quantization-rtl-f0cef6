// pot_shifter: the multiplier of the PoT MAC, reduced to one arithmetic shift.
//
// A weight of magnitude 2^-e multiplies an activation a by shifting it right
// by e places. To keep the bits that a right shift would drop, the activation
// is first placed in a PROD_W-bit fixed-point word with FRAC_W = PROD_W - ACT_W
// fraction bits (a * 2^FRAC_W), and that word is shifted right arithmetically:
//
//     p = floor(a * 2^FRAC_W / 2^e)           (a two's complement, e unsigned)
//
// With the default sizes p is a 12-bit number in units of 1/16 of an
// activation step; e = 0..7 and |a| <= 128 always fit, so the shift never
// overflows. Bits below 2^-FRAC_W are truncated (rounded towards minus
// infinity), which is the only rounding in the unit.
//
// The shift alone handles the magnitude; the weight's sign is applied
// afterwards by pot_sign_correct, in that order, as the paper describes.
//
// PRUNE_ZERO = 1 reuses the smallest magnitude's exponent code (all ones) as a
// zero weight, so that pruned networks can be run; p is then 0. It is off by
// default, where all 2^EXP_W codes are magnitudes.
//
// Purely combinational; no clock.
// From the paper: the 8-bit activation, 12-bit intermediate, exponent-only
// weight and the shift replacing the multiplier. This design's own choices:
// the fixed-point placement (FRAC_W fraction bits), truncation, and the
// optional zero code.
module pot_shifter #(
  parameter int unsigned ACT_W      = pot_pkg::ACT_W,
  parameter int unsigned EXP_W      = pot_pkg::EXP_W,
  parameter int unsigned PROD_W     = pot_pkg::PROD_W,
  parameter bit          PRUNE_ZERO = 1'b0
) (
  input  logic signed [ACT_W-1:0]  act,    // activation, two's complement
  input  logic        [EXP_W-1:0]  exp_i,  // weight exponent code e
  output logic signed [PROD_W-1:0] prod    // a * 2^-e in 1/2^FRAC_W units
);

  localparam int unsigned FRAC_W = PROD_W - ACT_W;

  if (PROD_W < ACT_W) begin : g_bad_width
    $error("pot_shifter: PROD_W must be at least ACT_W");
  end

  logic signed [PROD_W-1:0] act_fx;   // activation with FRAC_W fraction bits
  logic signed [PROD_W-1:0] shifted;  // act_fx >>> e, sign bit replicated
  logic                     is_zero;

  always_comb begin
    act_fx  = PROD_W'(act) <<< FRAC_W;
    shifted = act_fx >>> exp_i;
    is_zero = PRUNE_ZERO && (exp_i == {EXP_W{1'b1}});
    prod    = is_zero ? '0 : shifted;
  end

endmodule
