// pot_accumulator: the ACC_W-bit accumulator register of the PoT MAC.
//
// Every cycle with en = 1 it adds the signed term to its content. When first
// is also 1 the old content is dropped and the register loads the term, which
// starts a new dot product without a separate clear cycle. Sums that leave the
// ACC_W-bit range wrap around in two's complement, as a plain adder does.
//
//   en first | acc next
//   0  -     | acc
//   1  0     | acc + term   (mod 2^ACC_W)
//   1  1     | term
//
// Timing: acc shows the result one clock edge after the term is presented.
// Reset (rst_n low, asynchronous) clears acc to 0.
// From the paper: the 16-bit accumulator width. This design's choices: the
// first/en controls, wrap-around on overflow and the asynchronous reset.
module pot_accumulator #(
  parameter int unsigned ACC_W = pot_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,     // add term this cycle
  input  logic                    first,  // term is the first of a new sum
  input  logic signed [ACC_W-1:0] term,   // sign-corrected product
  output logic signed [ACC_W-1:0] acc     // running sum
);

  logic signed [ACC_W-1:0] base;

  always_comb base = first ? '0 : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= base + term;
  end

endmodule
