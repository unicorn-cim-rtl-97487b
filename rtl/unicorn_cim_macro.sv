// unicorn_cim_macro -- one Unicorn-CIM floating-point compute-in-memory macro.
//
// Computes, for one FP16 input vector x[0..ROWS-1], the COLS dot products
//   y(c) = sum_i x(i) * w(i,c)
// where w(i,c) has sign S(i,c), mantissa M(i,c) and the exponent W_E(b,c) shared by the
// N rows of block b = i / N (One4N). Shared exponents and signs live in the ESA with
// Hamming SEC-DED protection (8 check bits per 104-bit row), mantissas live unprotected
// in the MCA. Data flow, following the paper:
//   ESA rows -> ECC circuit (correct 1, detect 2) -> exponent adders X_E,i + W_E
//   -> exponent processing unit (block max, E_max, E_diff, mantissa alignment)
//   -> MCA multiplies aligned 1.X_M by 1.W_M, XOR array gives the signs
//   -> one adder tree per column -> product management (FP16, truncation).
// The pipeline registers and their placement are this design's choice:
//   stage 1: input vector, corrected exponents/signs, exponent sums, ECC flags;
//   stage 2: E_max, aligned mantissas, product signs;
//   stage 3: column sums;
//   stage 4: FP16 results with the overflow/underflow and ECC flags.
// valid rises LATENCY = 4 cycles after the cycle in which start is high; a new start may
// be given every cycle. x is sampled only in the start cycle. Writes (esa_we, mca_we)
// must not overlap an operation in flight; the cim_controller guarantees this.
module unicorn_cim_macro
  import unicorn_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 16,
  parameter int unsigned N    = 8,
  localparam int unsigned NBLK   = ceil_div(ROWS, N),
  localparam int unsigned CODE_W = ham_pos_bits(ECC_DATA_W) + 1,
  localparam int unsigned WORD_W = ECC_DATA_W + CODE_W,
  localparam int unsigned CW     = ceil_div(EXP_W * COLS + N * COLS, ECC_DATA_W),
  localparam int unsigned WORDS  = NBLK * CW,
  localparam int unsigned EAW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned MAW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SUM_W  = PROD_W + ((ROWS > 1) ? $clog2(ROWS) : 1) + 1,
  localparam int unsigned CNT_W  = $clog2(WORDS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // weight-row writes
  input  logic                  esa_we,
  input  logic [EAW-1:0]        esa_waddr,
  input  logic [WORD_W-1:0]     esa_wdata,
  input  logic                  mca_we,
  input  logic [MAW-1:0]        mca_waddr,
  input  logic [COLS*MAN_W-1:0] mca_wdata,
  // MAC
  input  logic                  start,
  input  fp16_t                 x [ROWS],
  output logic                  valid,
  output fp16_t                 result [COLS],
  output logic [COLS-1:0]       overflow,
  output logic [COLS-1:0]       underflow,
  output logic [CNT_W-1:0]      ecc_corrected,
  output logic                  ecc_uncorrectable
);

  localparam int unsigned LATENCY = 4;

  // ---------------- ESA with ECC and exponent adders ----------------
  logic [EXP_W-1:0]  x_exp  [ROWS];
  logic [EXP_W-1:0]  w_exp  [NBLK][COLS];
  logic [COLS-1:0]   w_sign [ROWS];
  logic [ESUM_W-1:0] esum   [ROWS][COLS];
  logic [WORDS-1:0]  cw_single, cw_multi;

  always_comb begin
    for (int r = 0; r < ROWS; r++) x_exp[r] = x[r].exp;
  end

  esa_subarray #(.ROWS(ROWS), .COLS(COLS), .N(N)) u_esa (
    .clk       (clk),
    .we        (esa_we),
    .waddr     (esa_waddr),
    .wdata     (esa_wdata),
    .x_exp     (x_exp),
    .w_exp     (w_exp),
    .w_sign    (w_sign),
    .esum      (esum),
    .cw_single (cw_single),
    .cw_multi  (cw_multi)
  );

  // ---------------- stage 1 ----------------
  logic              v1;
  fp16_t             x1      [ROWS];
  logic [EXP_W-1:0]  w_exp1  [NBLK][COLS];
  logic [COLS-1:0]   w_sign1 [ROWS];
  logic [ESUM_W-1:0] esum1   [ROWS][COLS];
  logic [CNT_W-1:0]  corr1;
  logic              multi1;

  always_ff @(posedge clk) begin
    if (start) begin
      x1      <= x;
      w_exp1  <= w_exp;
      w_sign1 <= w_sign;
      esum1   <= esum;
      corr1   <= CNT_W'($countones(cw_single));
      multi1  <= |cw_multi;
    end
  end

  // ---------------- stage 2: exponent processing, signs ----------------
  logic [ESUM_W-1:0] emax    [COLS];
  logic [SIG_W-1:0]  aligned [ROWS][COLS];
  logic [ROWS-1:0]   x_sign1;
  logic [COLS-1:0]   p_sign  [ROWS];
  logic [COLS-1:0]   w_nz1   [NBLK];

  always_comb begin
    for (int r = 0; r < ROWS; r++) x_sign1[r] = x1[r].sign;
    for (int b = 0; b < NBLK; b++)
      for (int c = 0; c < COLS; c++) w_nz1[b][c] = (w_exp1[b][c] != '0);
  end

  exponent_processing_unit #(.ROWS(ROWS), .COLS(COLS), .N(N)) u_epu (
    .x       (x1),
    .w_exp   (w_exp1),
    .esum    (esum1),
    .emax    (emax),
    .aligned (aligned)
  );

  sign_processing_unit #(.ROWS(ROWS), .COLS(COLS)) u_spu (
    .x_sign (x_sign1),
    .w_sign (w_sign1),
    .p_sign (p_sign)
  );

  logic              v2;
  logic [ESUM_W-1:0] emax2    [COLS];
  logic [SIG_W-1:0]  aligned2 [ROWS][COLS];
  logic [COLS-1:0]   p_sign2  [ROWS];
  logic [COLS-1:0]   w_nz2    [NBLK];
  logic [CNT_W-1:0]  corr2;
  logic              multi2;

  always_ff @(posedge clk) begin
    if (v1) begin
      emax2    <= emax;
      aligned2 <= aligned;
      p_sign2  <= p_sign;
      w_nz2    <= w_nz1;
      corr2    <= corr1;
      multi2   <= multi1;
    end
  end

  // ---------------- stage 3: MCA products and adder trees ----------------
  logic [PROD_W-1:0] prod [ROWS][COLS];

  mca_subarray #(.ROWS(ROWS), .COLS(COLS), .N(N)) u_mca (
    .clk     (clk),
    .we      (mca_we),
    .waddr   (mca_waddr),
    .wdata   (mca_wdata),
    .aligned (aligned2),
    .w_nz    (w_nz2),
    .prod    (prod)
  );

  logic signed [SUM_W-1:0] colsum [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [PROD_W-1:0] mag [ROWS];
    logic [ROWS-1:0]   neg;
    always_comb begin
      for (int r = 0; r < ROWS; r++) begin
        mag[r] = prod[r][c];
        neg[r] = p_sign2[r][c];
      end
    end
    adder_tree #(.LEN(ROWS), .IN_W(PROD_W)) u_tree (
      .mag (mag),
      .neg (neg),
      .sum (colsum[c])
    );
  end

  logic                    v3;
  logic signed [SUM_W-1:0] colsum3 [COLS];
  logic [ESUM_W-1:0]       emax3   [COLS];
  logic [CNT_W-1:0]        corr3;
  logic                    multi3;

  always_ff @(posedge clk) begin
    if (v2) begin
      colsum3 <= colsum;
      emax3   <= emax2;
      corr3   <= corr2;
      multi3  <= multi2;
    end
  end

  // ---------------- stage 4: product management ----------------
  fp16_t           res [COLS];
  logic [COLS-1:0] ovf, unf;

  for (genvar c = 0; c < COLS; c++) begin : g_pm
    product_management #(.SUM_W(SUM_W)) u_pm (
      .sum       (colsum3[c]),
      .emax      (emax3[c]),
      .result    (res[c]),
      .overflow  (ovf[c]),
      .underflow (unf[c])
    );
  end

  always_ff @(posedge clk) begin
    if (v3) begin
      result            <= res;
      overflow          <= ovf;
      underflow         <= unf;
      ecc_corrected     <= corr3;
      ecc_uncorrectable <= multi3;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {v1, v2, v3, valid} <= '0;
    else        {v1, v2, v3, valid} <= {start, v1, v2, v3};
  end

  // A weight write while an operation is in flight would mix old and new weights.
  assert property (@(posedge clk) disable iff (!rst_n) (esa_we || mca_we) |-> !(v1 || v2))
    else $error("unicorn_cim_macro: weight write during an operation");

  initial assert (LATENCY == 4);

endmodule
