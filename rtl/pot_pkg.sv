// pot_pkg: shared sizes of the power-of-two (PoT) multiply-accumulate unit.
//
// A PoT weight is a sign bit and an exponent code e, and stands for the value
// (-1)^sign * 2^-e. Weights are normalised to [-1, 1] before quantisation, so
// the largest level is 2^0 = 1 and the smallest 2^-(2^EXP_W - 1).
// With 4-bit weights (1 sign bit + 3 exponent bits) there are 8 magnitudes,
// 1, 1/2, ..., 1/128. Activations are 8-bit two's complement; the shifted
// product is held in a 12-bit intermediate and summed in a 16-bit accumulator.
// The 4-bit weight, 8-bit activation, 12-bit intermediate and 16-bit
// accumulator are the sizes of the paper's PoT 4x8 MAC; the split of the
// intermediate into 8 integer and 4 fraction bits is this design's choice.
package pot_pkg;

  // Sizes of the published configuration.
  localparam int unsigned ACT_W  = 8;   // activation width (two's complement)
  localparam int unsigned EXP_W  = 3;   // exponent bits of a weight
  localparam int unsigned W_W    = EXP_W + 1; // weight width: sign + exponent
  localparam int unsigned PROD_W = 12;  // intermediate (shifted product) width
  localparam int unsigned ACC_W  = 16;  // accumulator width

  // Default weight code in its stored form: {sign, exponent}.
  typedef struct packed {
    logic             sign;  // 1: negative weight
    logic [EXP_W-1:0] exp;   // magnitude is 2^-exp
  } pot_weight_t;

endpackage
