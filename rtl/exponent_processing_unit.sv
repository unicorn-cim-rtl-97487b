// exponent_processing_unit -- the five exponent steps of the Unicorn-CIM macro.
//
// For one input vector and every output column c it performs the paper's steps:
//   1. X_max(b): the largest input exponent of each block b of N inputs
//      (X_E,i + W_E, the other half of step 1, arrives from the ESA adders as esum);
//   2. S(b,c) = X_max(b) + W_E(b,c);
//   3. E_max(c) = max over blocks of S(b,c);
//   4. E_diff(i,c) = E_max(c) - (X_E,i + W_E(b,c));
//   5. aligned(i,c) = 1.X_M,i shifted right by E_diff(i,c).
// Because all N weights of a block column share W_E, step 2 gives the largest product
// exponent of the block with one adder instead of N, which is the saving the paper claims.
// This design's choices: the aligned mantissa keeps 11 bits (shifted-out bits are lost,
// a shift of 11 or more gives 0); an input whose exponent field is 0, or a block column
// whose shared exponent is 0, is zero and takes no part in the maximum.
//
// Interface and timing: purely combinational. Exponent sums carry bias 2*15 = 30.
module exponent_processing_unit
  import unicorn_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 16,
  parameter int unsigned N    = 8,
  localparam int unsigned NBLK = ceil_div(ROWS, N)
) (
  input  fp16_t             x       [ROWS],
  input  logic [EXP_W-1:0]  w_exp   [NBLK][COLS],
  input  logic [ESUM_W-1:0] esum    [ROWS][COLS],
  output logic [ESUM_W-1:0] emax    [COLS],
  output logic [SIG_W-1:0]  aligned [ROWS][COLS]
);

  logic [EXP_W-1:0]  xmax [NBLK];
  logic [ESUM_W-1:0] smax [NBLK][COLS];

  // Step 1: block maximum of the input exponents.
  always_comb begin
    for (int b = 0; b < NBLK; b++) begin
      xmax[b] = '0;
      for (int n = 0; n < N; n++)
        if (b * N + n < ROWS && x[b*N + n].exp > xmax[b]) xmax[b] = x[b*N + n].exp;
    end
  end

  // Steps 2 and 3: maximum exponent sum per block, then over all blocks.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      emax[c] = '0;
      for (int b = 0; b < NBLK; b++) begin
        smax[b][c] = (xmax[b] != '0 && w_exp[b][c] != '0)
                   ? ESUM_W'(xmax[b]) + ESUM_W'(w_exp[b][c]) : '0;
        if (smax[b][c] > emax[c]) emax[c] = smax[b][c];
      end
    end
  end

  // Steps 4 and 5: exponent difference and mantissa alignment.
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        logic [ESUM_W-1:0] ediff;
        logic [SIG_W-1:0]  sig;
        ediff = emax[c] - esum[r][c];
        sig   = {1'b1, x[r].man};
        if (x[r].exp == '0 || w_exp[r / N][c] == '0 || ediff >= ESUM_W'(SIG_W))
          aligned[r][c] = '0;
        else
          aligned[r][c] = sig >> ediff;
      end
    end
  end

endmodule
