// unicorn_pkg -- types, sizes and helper functions shared by the Unicorn-CIM RTL.
//
// Number format: IEEE half precision (FP16), 1 sign bit, 5 exponent bits, 10 mantissa
// bits, bias 15. The split into 1/5/10 bits is the paper's; the bias and the rule that
// an exponent field of 0 means zero (subnormals flushed) are this design's choice.
//
// One4N ECC: the shared exponents and the sign bits of a block of N weight rows are cut
// into ECC rows of ECC_DATA_W = 104 payload bits, each protected by ECC_CODE_W = 8
// Hamming bits (7 position parities P6..P0 plus an overall parity P7). Both sizes
// follow the paper. The Hamming bit placement below is this design's choice: payload
// bit j sits at the j-th codeword position, counted from 1, that is not a power of two;
// P_k sits at position 2^k; P7 covers the whole codeword (position 0).
package unicorn_pkg;

  localparam int unsigned EXP_W  = 5;
  localparam int unsigned MAN_W  = 10;
  localparam int unsigned BIAS   = 15;
  localparam int unsigned SIG_W  = MAN_W + 1;      // mantissa with hidden bit
  localparam int unsigned ESUM_W = EXP_W + 1;      // X_E + W_E (bias 2*BIAS)
  localparam int unsigned PROD_W = 2 * SIG_W;      // aligned 1.X_M times 1.W_M

  localparam int unsigned ECC_DATA_W = 104;
  localparam int unsigned ECC_POS_W  = 7;
  localparam int unsigned ECC_CODE_W = ECC_POS_W + 1;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } fp16_t;

  // Target of a weight-row write.
  typedef enum logic { TGT_ESA = 1'b0, TGT_MCA = 1'b1 } wtarget_e;

  // Smallest number of Hamming position bits r with 2^r >= data_w + r + 1.
  function automatic int unsigned ham_pos_bits(int unsigned data_w);
    int unsigned r = 1;
    while ((1 << r) < data_w + r + 1) r++;
    return r;
  endfunction

  // Codeword position (1-based, skipping powers of two) of payload bit j.
  function automatic int unsigned ham_pos(int unsigned j);
    int unsigned p = 2;
    int unsigned n = 0;
    while (1) begin
      p++;
      if ((p & (p - 1)) != 0) begin
        if (n == j) return p;
        n++;
      end
    end
  endfunction

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
