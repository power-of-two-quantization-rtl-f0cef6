// pot_sign_correct: applies a PoT weight's sign to the shifted product.
//
// The shifter works on magnitudes of the weight only; when the weight's sign
// bit is set the product must be negated. The PROD_W-bit product is first
// sign-extended to the accumulator width OUT_W and then negated, so the one
// value that has no positive counterpart in PROD_W bits (-2^(PROD_W-1), from
// a = -128 and e = 0) is still negated exactly.
//
//     y = sign ? -sext(p) : sext(p)
//
// Purely combinational; no clock.
// From the paper: that the sign is applied after the shift, as a separate
// correction step. This design's choice: doing it at the accumulator width.
module pot_sign_correct #(
  parameter int unsigned PROD_W = pot_pkg::PROD_W,
  parameter int unsigned OUT_W  = pot_pkg::ACC_W
) (
  input  logic signed [PROD_W-1:0] prod,   // shifted product, weight magnitude only
  input  logic                     sign,   // weight sign bit, 1 = negative
  output logic signed [OUT_W-1:0]  term    // signed term to accumulate
);

  if (OUT_W <= PROD_W) begin : g_bad_width
    $error("pot_sign_correct: OUT_W must exceed PROD_W");
  end

  logic signed [OUT_W-1:0] ext;

  always_comb begin
    ext  = OUT_W'(prod);  // sign extension: prod is signed
    term = sign ? -ext : ext;
  end

endmodule
