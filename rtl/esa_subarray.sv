// esa_subarray -- Exponent Summation Array with One4N ECC storage.
//
// Under One4N, the N weights of a column that share a block of N input-channel rows are
// fine-tuned offline to share one exponent. The array therefore stores, per block, COLS
// shared 5-bit exponents and the N x COLS sign bits (5*COLS + N*COLS bits, 208 for N = 8),
// cut into ECC rows of 104 payload bits, each stored with its 8 Hamming bits (2 ECC rows
// per block for N = 8, 512 check bits for the 256-row array). Every ECC row read passes
// through the ECC circuit (one4n_ecc_decoder) before the exponent adders, which form
// X_E,i + W_E for every row i and column, as in the paper's ESA subarray.
//
// Payload order inside a block (this design's choice): exponent of column c at bits
// [5c+4:5c], then the sign of block row n, column c at bit 5*COLS + n*COLS + c, zero padded
// to CW*104 bits; ECC row k of block b holds payload bits [104k+103:104k] at address
// b*CW + k, stored as {code, payload}.
//
// Interface and timing: one synchronous write port (we/waddr/wdata, the pre-encoded row);
// all rows are read in parallel and the corrected exponents, signs, exponent sums and
// per-row ECC flags are combinational outputs. The cells have no reset. The decoders'
// raw syndromes are not brought out (only their single/multi flags), so lint reports
// the per-word syndrome signal as unused.
module esa_subarray
  import unicorn_pkg::*;
#(
  parameter int unsigned ROWS   = 256,
  parameter int unsigned COLS   = 16,
  parameter int unsigned N      = 8,
  parameter int unsigned DATA_W = ECC_DATA_W,
  localparam int unsigned CODE_W = ham_pos_bits(DATA_W) + 1,
  localparam int unsigned WORD_W = DATA_W + CODE_W,
  localparam int unsigned NBLK   = ceil_div(ROWS, N),
  localparam int unsigned TB     = EXP_W * COLS + N * COLS,
  localparam int unsigned CW     = ceil_div(TB, DATA_W),
  localparam int unsigned WORDS  = NBLK * CW,
  localparam int unsigned AW     = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [WORD_W-1:0]   wdata,
  input  logic [EXP_W-1:0]    x_exp  [ROWS],
  output logic [EXP_W-1:0]    w_exp  [NBLK][COLS],
  output logic [COLS-1:0]     w_sign [ROWS],
  output logic [ESUM_W-1:0]   esum   [ROWS][COLS],
  output logic [WORDS-1:0]    cw_single,
  output logic [WORDS-1:0]    cw_multi
);

  logic [WORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  logic [DATA_W-1:0]    pay_fix [WORDS];
  logic [CW*DATA_W-1:0] blk_pay [NBLK];

  for (genvar w = 0; w < WORDS; w++) begin : g_ecc
    logic [CODE_W-1:0] syn;
    one4n_ecc_decoder #(.DATA_W(DATA_W)) u_ecc (
      .data_in    (mem[w][DATA_W-1:0]),
      .code_in    (mem[w][WORD_W-1:DATA_W]),
      .data_out   (pay_fix[w]),
      .syndrome   (syn),
      .err_single (cw_single[w]),
      .err_multi  (cw_multi[w])
    );
  end

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    for (genvar k = 0; k < CW; k++) begin : g_cw
      assign blk_pay[b][k*DATA_W +: DATA_W] = pay_fix[b*CW + k];
    end
    for (genvar c = 0; c < COLS; c++) begin : g_exp
      assign w_exp[b][c] = blk_pay[b][c*EXP_W +: EXP_W];
    end
    for (genvar n = 0; n < N; n++) begin : g_row
      if (b * N + n < ROWS) begin : g_used
        assign w_sign[b*N + n] = blk_pay[b][EXP_W*COLS + n*COLS +: COLS];
      end
    end
  end

  // Exponent adders: X_E,i + W_E of the row's block.
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        esum[r][c] = ESUM_W'(x_exp[r]) + ESUM_W'(w_exp[r / N][c]);
  end

endmodule
