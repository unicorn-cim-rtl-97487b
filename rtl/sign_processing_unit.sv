// sign_processing_unit -- XOR array for the product signs.
//
// The sign of a floating-point product is the XOR of the operand signs, so, as in the
// paper, the signs bypass the exponent path: every weight sign of row i (corrected by the
// ECC circuit) is XORed with the sign of input i. The result travels with the mantissa
// product into the adder tree.
//
// Interface and timing: purely combinational.
module sign_processing_unit #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 16
) (
  input  logic [ROWS-1:0] x_sign,
  input  logic [COLS-1:0] w_sign [ROWS],
  output logic [COLS-1:0] p_sign [ROWS]
);

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      p_sign[r] = w_sign[r] ^ {COLS{x_sign[r]}};
  end

endmodule
