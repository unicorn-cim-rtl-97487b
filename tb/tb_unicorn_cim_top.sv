// tb_unicorn_cim_top -- end-to-end test of the accelerator at its default size
// (4 macros of 256 x 16 FP16 weights, N = 8).
// Every operation loads weights through the weight buffer and inputs through the input
// buffer, starts a MAC and reads all 64 results back through the output buffer; each
// result and flag is compared with the reference model, and the plain operations are also
// compared with a real-number dot product. Mechanisms that must each happen at least
// once: a start waiting for queued writes, single-bit
// ECC correction with unchanged results, double-error detection, FP16 overflow, FP16
// underflow, zero inputs and zero weight blocks, a mantissa shifted out completely by
// alignment, and negative results. (The weight buffer drains one row per cycle, as fast
// as rows arrive, so it fills up only in its own testbench; n_full is only reported.)
module tb_unicorn_cim_top;
  import unicorn_pkg::*;
  import tb_ref_pkg::*;
  localparam int M = 4, ROWS = 256, COLS = 16, N = 8, NBLK = 32, WORDS = 64;

  logic clk = 0, rst_n = 0;
  logic wb_push = 0, wb_full;
  logic [1:0] wb_macro = '0;
  wtarget_e wb_target = TGT_ESA;
  logic [7:0] wb_addr = '0;
  logic [159:0] wb_data = '0;
  logic in_we = 0;
  logic [7:0] in_addr = '0;
  fp16_t in_data = '0;
  logic start = 0, busy, done;
  logic [5:0] out_addr = '0;
  fp16_t out_data;
  logic [8:0] st_corr;
  logic st_uncorr;
  logic [63:0] st_ovf, st_unf;

  unicorn_cim_top dut (.clk(clk), .rst_n(rst_n), .wb_push(wb_push), .wb_macro(wb_macro),
    .wb_target(wb_target), .wb_addr(wb_addr), .wb_data(wb_data), .wb_full(wb_full),
    .in_we(in_we), .in_addr(in_addr), .in_data(in_data), .start(start), .busy(busy), .done(done),
    .out_addr(out_addr), .out_data(out_data), .st_ecc_corrected(st_corr),
    .st_ecc_uncorrectable(st_uncorr), .st_overflow(st_ovf), .st_underflow(st_unf));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_full = 0, n_wait = 0, n_corr = 0, n_det = 0, n_ovf = 0, n_unf = 0;
  int n_zero_in = 0, n_zero_blk = 0, n_shift_out = 0, n_neg = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int we_m [M][NBLK][COLS];
  bit ws_m [M][NBLK][8][16];
  int wm_m [M][ROWS][COLS];
  logic [111:0] rows_m [M][WORDS];
  logic [15:0] xv [ROWS];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic push(int m, wtarget_e t, int a, logic [159:0] d);
    @(negedge clk);
    if (wb_full) n_full++;
    while (wb_full) @(negedge clk);
    wb_push = 1; wb_macro = 2'(m); wb_target = t; wb_addr = 8'(a); wb_data = d;
    @(negedge clk);
    wb_push = 0;
  endtask

  // Back-to-back pushes (one per cycle) so that the buffer fills up.
  task automatic load_macro(int m, int elo, int ehi);
    for (int b = 0; b < NBLK; b++) begin
      logic [207:0] p;
      for (int c = 0; c < COLS; c++) begin
        we_m[m][b][c] = $urandom_range(ehi, elo);
        if ($urandom_range(19) == 0) we_m[m][b][c] = 0;
      end
      for (int n = 0; n < 8; n++) for (int c = 0; c < 16; c++) ws_m[m][b][n][c] = 1'($urandom);
      p = ref_payload(we_m[m][b], ws_m[m][b]);
      rows_m[m][2*b]   = ref_esa_row(p, 0);
      rows_m[m][2*b+1] = ref_esa_row(p, 1);
    end
    @(negedge clk);
    for (int a = 0; a < WORDS + ROWS; a++) begin
      logic [159:0] d;
      if (a < WORDS) d = 160'(rows_m[m][a]);
      else for (int c = 0; c < COLS; c++) begin
        wm_m[m][a-WORDS][c] = $urandom_range(1023);
        d[10*c +: 10] = 10'(wm_m[m][a-WORDS][c]);
      end
      if (wb_full) n_full++;
      while (wb_full) @(negedge clk);
      wb_push = 1; wb_macro = 2'(m);
      wb_target = (a < WORDS) ? TGT_ESA : TGT_MCA;
      wb_addr = 8'((a < WORDS) ? a : a - WORDS);
      wb_data = d;
      @(negedge clk);
      wb_push = 0;
    end
  endtask

  task automatic load_inputs(int elo, int ehi);
    for (int r = 0; r < ROWS; r++) begin
      xv[r] = 16'($urandom);
      xv[r][14:10] = 5'($urandom_range(ehi, elo));
      if ($urandom_range(15) == 0) xv[r][14:10] = 0;
      @(negedge clk);
      in_we = 1; in_addr = 8'(r); in_data = fp16_t'(xv[r]);
    end
    @(negedge clk);
    in_we = 0;
  endtask

  task automatic run_and_wait();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  // Compares all results; exact_real additionally checks against real arithmetic.
  task automatic check_results(int exp_corr, bit exp_uncorr, bit exact_real);
    logic [15:0] xs [];
    int we_r [];
    bit ws_r [];
    int wm_r [];
    xs = new[ROWS]; we_r = new[ROWS]; ws_r = new[ROWS]; wm_r = new[ROWS];
    @(negedge clk);
    chk(int'(st_corr) == exp_corr, $sformatf("corrected %0d expected %0d", st_corr, exp_corr));
    chk(st_uncorr == exp_uncorr, "uncorrectable flag");
    if (st_corr != 0) n_corr++;
    if (st_uncorr) n_det++;
    for (int m = 0; m < M; m++) begin
      for (int c = 0; c < COLS; c++) begin
        int em;
        longint s;
        bit eo, eu;
        logic [15:0] e;
        real exact;
        exact = 0.0;
        for (int r = 0; r < ROWS; r++) begin
          xs[r] = xv[r]; we_r[r] = we_m[m][r/N][c]; ws_r[r] = ws_m[m][r/N][r%N][c]; wm_r[r] = wm_m[m][r][c];
          if (xv[r][14:10] == 0) n_zero_in++;
          if (we_r[r] == 0) n_zero_blk++;
          if (we_r[r] != 0)
            exact += fp16_to_real(xv[r]) * fp16_to_real({1'(ws_r[r]), 5'(we_r[r]), 10'(wm_r[r])});
        end
        s = ref_colsum(xs, we_r, ws_r, wm_r, em);
        for (int r = 0; r < ROWS; r++)
          if (xv[r][14:10] != 0 && we_r[r] != 0 && em - (int'(xv[r][14:10]) + we_r[r]) >= 11) n_shift_out++;
        e = ref_norm(s, em, eo, eu);
        out_addr = 6'(m * COLS + c);
        #1;
        if (exp_uncorr) continue;
        chk(out_data == e, $sformatf("macro %0d col %0d: %h expected %h", m, c, out_data, e));
        chk(st_ovf[m*COLS + c] == eo && st_unf[m*COLS + c] == eu, "range flags");
        n_ovf += int'(eo); n_unf += int'(eu); n_neg += int'(e[15]);
        if (exact_real && !eo && !eu) begin
          real got, err, scale;
          got = fp16_to_real(out_data);
          scale = 1.0;
          for (int i = 30; i < em; i++) scale = scale * 2.0;
          for (int i = em; i < 30; i++) scale = scale / 2.0;
          err = got - exact;
          if (err < 0) err = -err;
          // per row the alignment drops < 2^-10 * 2 of 2^(E_max-30); truncation to FP16 < 2^-10 relative
          chk(err <= scale * ROWS * 4.0 / 1024.0 + 2.0 * (got < 0 ? -got : got) / 1024.0,
              $sformatf("real check macro %0d col %0d: %f vs %f", m, c, got, exact));
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. plain operation
    for (int m = 0; m < M; m++) load_macro(m, 8, 22);
    load_inputs(8, 22);
    run_and_wait();
    check_results(0, 0, 1);

    // 2. single errors in two macros, start issued while the rewrites are still queued
    @(negedge clk);
    wb_push = 1; wb_macro = 2'd1; wb_target = TGT_ESA; wb_addr = 8'd7;  wb_data = 160'(rows_m[1][7] ^ (112'(1) << 4));
    @(negedge clk);
    wb_macro = 2'd3; wb_addr = 8'd50; wb_data = 160'(rows_m[3][50] ^ (112'(1) << 95));
    start = 1;
    if (busy) n_wait++;
    @(negedge clk);
    wb_push = 0;
    start = 0;
    while (!done) @(negedge clk);
    check_results(2, 0, 0);

    // 3. double error in macro 2, then repair
    push(2, TGT_ESA, 12, 160'(rows_m[2][12] ^ (112'(1) << 9) ^ (112'(1) << 60)));
    run_and_wait();
    check_results(2, 1, 0);
    push(1, TGT_ESA, 7, 160'(rows_m[1][7]));
    push(3, TGT_ESA, 50, 160'(rows_m[3][50]));
    push(2, TGT_ESA, 12, 160'(rows_m[2][12]));
    run_and_wait();
    check_results(0, 0, 1);

    // 4. overflow
    for (int m = 0; m < M; m++) load_macro(m, 27, 30);
    load_inputs(27, 30);
    run_and_wait();
    check_results(0, 0, 0);

    // 5. underflow
    for (int m = 0; m < M; m++) load_macro(m, 1, 3);
    load_inputs(1, 3);
    run_and_wait();
    check_results(0, 0, 0);

    $display("full=%0d wait=%0d corr=%0d det=%0d ovf=%0d unf=%0d zero_in=%0d zero_blk=%0d shift_out=%0d neg=%0d",
             n_full, n_wait, n_corr, n_det, n_ovf, n_unf, n_zero_in, n_zero_blk, n_shift_out, n_neg);
    chk(n_wait > 0, "start never waited for queued writes");
    chk(n_corr > 0, "no ECC correction");
    chk(n_det > 0, "no ECC detection");
    chk(n_ovf > 0, "no overflow");
    chk(n_unf > 0, "no underflow");
    chk(n_zero_in > 0, "no zero input");
    chk(n_zero_blk > 0, "no zero block");
    chk(n_shift_out > 0, "no mantissa shifted out");
    chk(n_neg > 0, "no negative result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
