// mca_subarray -- Mantissa Computing Array.
//
// Stores the 10-bit mantissa of every weight (ROWS rows of COLS mantissas; row i, column
// c at bits [10c+9:10c] of row i) and multiplies each aligned input mantissa with the
// weight significand 1.W_M. The hidden bit of a weight is 1 unless its block's shared
// exponent is 0 (a zero weight), which the w_nz input tells. Mantissas are not ECC
// protected: the paper finds DNN accuracy insensitive to mantissa bit errors. The paper
// names the array and its function; the plain binary multiplier is this design's choice.
//
// Interface and timing: one synchronous write port for a mantissa row; the products of
// all rows and columns are combinational. Product = aligned (11 bits, 10 fraction bits)
// times 1.W_M (11 bits, 10 fraction bits), 22 bits with 20 fraction bits.
module mca_subarray
  import unicorn_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 16,
  parameter int unsigned N    = 8,
  localparam int unsigned NBLK = ceil_div(ROWS, N),
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [COLS*MAN_W-1:0]   wdata,
  input  logic [SIG_W-1:0]        aligned [ROWS][COLS],
  input  logic [COLS-1:0]         w_nz    [NBLK],
  output logic [PROD_W-1:0]       prod    [ROWS][COLS]
);

  logic [COLS*MAN_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        prod[r][c] = PROD_W'(aligned[r][c]) * PROD_W'({w_nz[r / N][c], mem[r][c*MAN_W +: MAN_W]});
  end

endmodule
