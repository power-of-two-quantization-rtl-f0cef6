// pot_mac: multiply-accumulate unit for power-of-two (PoT) weights.
//
// Each weight is stored as a sign bit and an exponent e, meaning
// (-1)^sign * 2^-e, so multiplying it with an 8-bit activation needs no
// multiplier: the activation is shifted by e (pot_shifter) into a 12-bit
// intermediate, the sign is applied afterwards (pot_sign_correct) and the
// result is added to a 16-bit accumulator (pot_accumulator). The weight word
// is used as stored, with no decoding.
//
// Pipeline (one term per clock, no stalls):
//   edge 1  the inputs (in_valid, first, act, weight) are registered
//   edge 2  shift + sign correction + add happen between edges 1 and 2, and
//           acc takes the new sum; acc_valid rises with it
// So the sum including a term accepted at edge k is on acc after edge k+1.
// A dot product is a run of terms whose first one has first = 1; the value on
// acc when acc_valid is high and the next accepted term has first = 1 (or the
// stream stops) is the finished dot product.
//
// Number format: acc is a two's complement fixed-point value with
// FRAC_W = PROD_W - ACT_W fraction bits (4 at the default sizes), i.e.
// acc / 16 = sum(act_i * w_i), truncated per term to 1/16. It wraps around
// when the sum leaves the 16-bit range.
//
// Interface: weight = {sign, exponent}, W_W = EXP_W + 1 bits; act is two's
// complement. Reset is asynchronous, active low, and clears every register.
//
// From the paper: 4-bit sign+exponent weights, 8-bit activations, shift then
// sign correction, 12-bit intermediate, 16-bit accumulator, and a combinational
// datapath between registers. This design's own choices: the input register
// stage, the first/in_valid controls, the fixed-point alignment of the
// intermediate and the optional zero code (PRUNE_ZERO, off by default).
module pot_mac #(
  parameter int unsigned ACT_W      = pot_pkg::ACT_W,
  parameter int unsigned EXP_W      = pot_pkg::EXP_W,
  parameter int unsigned PROD_W     = pot_pkg::PROD_W,
  parameter int unsigned ACC_W      = pot_pkg::ACC_W,
  parameter bit          PRUNE_ZERO = 1'b0,
  localparam int unsigned W_W       = EXP_W + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,  // a term is presented
  input  logic                    first,     // it starts a new dot product
  input  logic signed [ACT_W-1:0] act,       // activation
  input  logic        [W_W-1:0]   weight,    // {sign, exponent}
  output logic signed [ACC_W-1:0] acc,       // accumulated sum (FRAC_W fraction bits)
  output logic                    acc_valid  // acc includes the term of 2 edges ago
);

  // ---- input register stage ----
  logic                    v_q, first_q;
  logic signed [ACT_W-1:0] act_q;
  logic        [W_W-1:0]   weight_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q      <= 1'b0;
      first_q  <= 1'b0;
      act_q    <= '0;
      weight_q <= '0;
    end else begin
      v_q     <= in_valid;
      first_q <= first;
      if (in_valid) begin
        act_q    <= act;
        weight_q <= weight;
      end
    end
  end

  // ---- combinational datapath: shift, then sign correction ----
  logic signed [PROD_W-1:0] prod;
  logic signed [ACC_W-1:0]  term;

  pot_shifter #(
    .ACT_W(ACT_W), .EXP_W(EXP_W), .PROD_W(PROD_W), .PRUNE_ZERO(PRUNE_ZERO)
  ) u_shift (
    .act  (act_q),
    .exp_i(weight_q[EXP_W-1:0]),
    .prod (prod)
  );

  pot_sign_correct #(.PROD_W(PROD_W), .OUT_W(ACC_W)) u_sign (
    .prod(prod),
    .sign(weight_q[W_W-1]),
    .term(term)
  );

  // ---- accumulator ----
  pot_accumulator #(.ACC_W(ACC_W)) u_acc (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (v_q),
    .first(first_q),
    .term (term),
    .acc  (acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_valid <= 1'b0;
    else        acc_valid <= v_q;
  end

endmodule
