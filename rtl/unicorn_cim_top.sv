// unicorn_cim_top -- Unicorn-CIM accelerator: NUM_MACROS One4N-protected FP CIM macros
// with their input buffer, weight buffer, output buffer and controller.
//
// The memory side (an external DRAM and its interface, not part of this design) loads
//   * weight rows through the weight buffer: wb_macro selects the macro, wb_target the
//     array (TGT_ESA: a pre-encoded {code, payload} row of shared exponents and signs;
//     TGT_MCA: a row of COLS 10-bit mantissas), wb_addr the row, wb_data the bits
//     (LSB aligned);
//   * the FP16 input vector through the input buffer (in_we/in_addr/in_data);
// and then pulses start. The controller first writes all queued weight rows, then runs
// one MAC on all macros with the same input vector, each macro producing COLS FP16 dot
// products over ROWS inputs. done pulses when the results are in the output buffer
// (out_addr = macro*COLS + column); the st_* outputs hold the ECC and range flags of that
// operation, summed or ORed over the macros.
// The macro internals follow the paper; the buffers, the controller, the sharing of one
// input vector by all macros and NUM_MACROS = 4 are this design's choices.
//
// Timing: weight writes take one cycle each; a MAC takes 1 + 4 cycles from the start
// (or from the last queued write) to capture, and done follows one cycle later.
module unicorn_cim_top
  import unicorn_pkg::*;
#(
  parameter int unsigned NUM_MACROS = 4,
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 16,
  parameter int unsigned N          = 8,
  parameter int unsigned WB_DEPTH   = 16,
  localparam int unsigned NBLK    = ceil_div(ROWS, N),
  localparam int unsigned CODE_W  = ham_pos_bits(ECC_DATA_W) + 1,
  localparam int unsigned WORD_W  = ECC_DATA_W + CODE_W,
  localparam int unsigned CW      = ceil_div(EXP_W * COLS + N * COLS, ECC_DATA_W),
  localparam int unsigned WORDS   = NBLK * CW,
  localparam int unsigned EAW     = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned MAW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned ADDR_W  = (EAW > MAW) ? EAW : MAW,
  localparam int unsigned MDATA_W = COLS * MAN_W,
  localparam int unsigned DATA_W  = (WORD_W > MDATA_W) ? WORD_W : MDATA_W,
  localparam int unsigned MSEL_W  = (NUM_MACROS > 1) ? $clog2(NUM_MACROS) : 1,
  localparam int unsigned OWORDS  = NUM_MACROS * COLS,
  localparam int unsigned OAW     = (OWORDS > 1) ? $clog2(OWORDS) : 1,
  localparam int unsigned CNT_W   = $clog2(WORDS + 1),
  localparam int unsigned STC_W   = $clog2(NUM_MACROS * WORDS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight rows
  input  logic               wb_push,
  input  logic [MSEL_W-1:0]  wb_macro,
  input  wtarget_e           wb_target,
  input  logic [ADDR_W-1:0]  wb_addr,
  input  logic [DATA_W-1:0]  wb_data,
  output logic               wb_full,
  // inputs
  input  logic               in_we,
  input  logic [MAW-1:0]     in_addr,
  input  fp16_t              in_data,
  // control
  input  logic               start,
  output logic               busy,
  output logic               done,
  // results
  input  logic [OAW-1:0]     out_addr,
  output fp16_t              out_data,
  output logic [STC_W-1:0]   st_ecc_corrected,
  output logic               st_ecc_uncorrectable,
  output logic [OWORDS-1:0]  st_overflow,
  output logic [OWORDS-1:0]  st_underflow
);

  localparam int unsigned WB_W = MSEL_W + 1 + ADDR_W + DATA_W;

  // ---------------- weight buffer ----------------
  logic [WB_W-1:0]   wb_head;
  logic              wb_empty, wb_pop;
  logic [MSEL_W-1:0] h_macro;
  logic              h_target;
  logic [ADDR_W-1:0] h_addr;
  logic [DATA_W-1:0] h_data;

  weight_buffer #(.W(WB_W), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (wb_push),
    .din   ({wb_macro, wb_target, wb_addr, wb_data}),
    .full  (wb_full),
    .pop   (wb_pop),
    .head  (wb_head),
    .empty (wb_empty)
  );

  assign {h_macro, h_target, h_addr, h_data} = wb_head;

  // ---------------- input buffer ----------------
  fp16_t x [ROWS];

  input_buffer #(.ROWS(ROWS)) u_ibuf (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (in_we),
    .waddr (in_addr),
    .wdata (in_data),
    .x     (x)
  );

  // ---------------- controller ----------------
  logic macro_start, capture;
  logic [NUM_MACROS-1:0] m_valid;

  cim_controller #(.LATENCY(4)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start),
    .wb_empty    (wb_empty),
    .wb_pop      (wb_pop),
    .macro_start (macro_start),
    .macro_valid (m_valid[0]),
    .capture     (capture),
    .busy        (busy),
    .done        (done)
  );

  // ---------------- macros ----------------
  fp16_t            res_all [OWORDS];
  logic [CNT_W-1:0] m_corr  [NUM_MACROS];
  logic [NUM_MACROS-1:0] m_multi;
  logic [OWORDS-1:0] m_ovf, m_unf;

  for (genvar m = 0; m < NUM_MACROS; m++) begin : g_macro
    fp16_t           res [COLS];
    logic [COLS-1:0] ovf, unf;
    logic            sel;
    assign sel = wb_pop && (int'(h_macro) == m);

    unicorn_cim_macro #(.ROWS(ROWS), .COLS(COLS), .N(N)) u_macro (
      .clk               (clk),
      .rst_n             (rst_n),
      .esa_we            (sel && h_target == TGT_ESA),
      .esa_waddr         (h_addr[EAW-1:0]),
      .esa_wdata         (h_data[WORD_W-1:0]),
      .mca_we            (sel && h_target == TGT_MCA),
      .mca_waddr         (h_addr[MAW-1:0]),
      .mca_wdata         (h_data[MDATA_W-1:0]),
      .start             (macro_start),
      .x                 (x),
      .valid             (m_valid[m]),
      .result            (res),
      .overflow          (ovf),
      .underflow         (unf),
      .ecc_corrected     (m_corr[m]),
      .ecc_uncorrectable (m_multi[m])
    );

    for (genvar c = 0; c < COLS; c++) begin : g_res
      assign res_all[m*COLS + c] = res[c];
    end
    assign m_ovf[m*COLS +: COLS] = ovf;
    assign m_unf[m*COLS +: COLS] = unf;
  end

  // ---------------- output buffer and status ----------------
  output_buffer #(.WORDS(OWORDS)) u_obuf (
    .clk     (clk),
    .rst_n   (rst_n),
    .capture (capture),
    .din     (res_all),
    .raddr   (out_addr),
    .dout    (out_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_ecc_corrected     <= '0;
      st_ecc_uncorrectable <= 1'b0;
      st_overflow          <= '0;
      st_underflow         <= '0;
    end else if (capture) begin
      logic [STC_W-1:0] total;
      total = '0;
      for (int m = 0; m < NUM_MACROS; m++) total += STC_W'(m_corr[m]);
      st_ecc_corrected     <= total;
      st_ecc_uncorrectable <= |m_multi;
      st_overflow          <= m_ovf;
      st_underflow         <= m_unf;
    end
  end

  // All macros run in lockstep.
  assert property (@(posedge clk) disable iff (!rst_n) (m_valid == '0) || (&m_valid))
    else $error("unicorn_cim_top: macros out of step");

endmodule
