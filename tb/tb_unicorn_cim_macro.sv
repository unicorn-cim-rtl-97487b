// tb_unicorn_cim_macro -- one full-size macro (256 rows, 16 columns, N = 8).
// Loads random One4N weights, runs MAC operations and compares every FP16 result and
// flag with the reference model; checks the 4-cycle latency, back-to-back operations,
// correction of single errors in the ECC rows (results unchanged), detection of a
// double error, overflow and underflow.
module tb_unicorn_cim_macro;
  import unicorn_pkg::*;
  import tb_ref_pkg::*;
  localparam int ROWS = 256, COLS = 16, N = 8, NBLK = 32, WORDS = 64;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic esa_we = 0, mca_we = 0, start = 0;
  logic [5:0] esa_waddr = '0;
  logic [111:0] esa_wdata = '0;
  logic [7:0] mca_waddr = '0;
  logic [159:0] mca_wdata = '0;
  fp16_t x [ROWS];
  logic valid;
  fp16_t result [COLS];
  logic [COLS-1:0] ovf, unf;
  logic [6:0] corr;
  logic uncorr;

  unicorn_cim_macro dut (.clk(clk), .rst_n(rst_n), .esa_we(esa_we), .esa_waddr(esa_waddr),
    .esa_wdata(esa_wdata), .mca_we(mca_we), .mca_waddr(mca_waddr), .mca_wdata(mca_wdata),
    .start(start), .x(x), .valid(valid), .result(result), .overflow(ovf), .underflow(unf),
    .ecc_corrected(corr), .ecc_uncorrectable(uncorr));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int we_m [NBLK][COLS];
  bit ws_m [NBLK][8][16];
  int wm_m [ROWS][COLS];
  logic [111:0] rows_m [WORDS];
  int n_ovf = 0, n_unf = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic esa_write(int a, logic [111:0] d);
    @(negedge clk);
    esa_we = 1; esa_waddr = 6'(a); esa_wdata = d;
    @(negedge clk);
    esa_we = 0;
  endtask

  task automatic load_weights(int elo, int ehi);
    for (int b = 0; b < NBLK; b++) begin
      logic [207:0] p;
      for (int c = 0; c < COLS; c++) begin
        we_m[b][c] = $urandom_range(ehi, elo);
        if ($urandom_range(19) == 0) we_m[b][c] = 0;
      end
      for (int n = 0; n < 8; n++) for (int c = 0; c < 16; c++) ws_m[b][n][c] = 1'($urandom);
      p = ref_payload(we_m[b], ws_m[b]);
      rows_m[2*b]   = ref_esa_row(p, 0);
      rows_m[2*b+1] = ref_esa_row(p, 1);
    end
    for (int a = 0; a < WORDS; a++) esa_write(a, rows_m[a]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        wm_m[r][c] = $urandom_range(1023);
        mca_wdata[10*c +: 10] = 10'(wm_m[r][c]);
      end
      mca_we = 1; mca_waddr = 8'(r);
    end
    @(negedge clk);
    mca_we = 0;
  endtask

  task automatic make_inputs(output fp16_t v [ROWS], input int elo, input int ehi);
    for (int r = 0; r < ROWS; r++) begin
      v[r] = fp16_t'(16'($urandom));
      v[r].exp = 5'($urandom_range(ehi, elo));
      if ($urandom_range(15) == 0) v[r].exp = 0;
    end
  endtask

  task automatic expect_results(fp16_t v [ROWS], int exp_corr, bit exp_uncorr);
    logic [15:0] xs [];
    int we_r [];
    bit ws_r [];
    int wm_r [];
    xs = new[ROWS]; we_r = new[ROWS]; ws_r = new[ROWS]; wm_r = new[ROWS];
    for (int c = 0; c < COLS; c++) begin
      int em;
      longint s;
      bit eo, eu;
      logic [15:0] e;
      for (int r = 0; r < ROWS; r++) begin
        xs[r] = v[r]; we_r[r] = we_m[r/N][c]; ws_r[r] = ws_m[r/N][r%N][c]; wm_r[r] = wm_m[r][c];
      end
      s = ref_colsum(xs, we_r, ws_r, wm_r, em);
      e = ref_norm(s, em, eo, eu);
      n_ovf += int'(eo); n_unf += int'(eu);
      chk(result[c] == e && ovf[c] == eo && unf[c] == eu,
          $sformatf("col %0d result %h/%b/%b expected %h/%b/%b", c, result[c], ovf[c], unf[c], e, eo, eu));
    end
    chk(int'(corr) == exp_corr, $sformatf("ecc_corrected %0d expected %0d", corr, exp_corr));
    chk(uncorr == exp_uncorr, "ecc_uncorrectable");
  endtask

  // Starts one operation and returns the cycles until valid.
  task automatic run_op(fp16_t v [ROWS], output int lat);
    @(negedge clk);
    x = v; start = 1;
    @(negedge clk);
    start = 0;
    for (int r = 0; r < ROWS; r++) x[r] = fp16_t'(16'($urandom));  // x only sampled at start
    lat = 1;
    while (!valid) begin
      @(negedge clk);
      lat++;
    end
  endtask

  initial begin
    fp16_t v1 [ROWS], v2 [ROWS];
    int lat;
    for (int r = 0; r < ROWS; r++) x[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights(8, 22);

    // plain operations
    repeat (3) begin
      make_inputs(v1, 8, 22);
      run_op(v1, lat);
      chk(lat == 4, $sformatf("latency %0d", lat));
      expect_results(v1, 0, 0);
    end

    // back-to-back operations
    make_inputs(v1, 8, 22);
    make_inputs(v2, 8, 22);
    @(negedge clk);
    x = v1; start = 1;
    @(negedge clk);
    x = v2;
    @(negedge clk);
    start = 0;
    repeat (2) @(negedge clk);
    chk(valid, "first of two back-to-back");
    expect_results(v1, 0, 0);
    @(negedge clk);
    chk(valid, "second of two back-to-back");
    expect_results(v2, 0, 0);

    // single errors in three ECC rows: corrected, results unchanged
    esa_write(5,  rows_m[5]  ^ (112'(1) << 3));     // shared exponent bit
    esa_write(20, rows_m[20] ^ (112'(1) << 100));   // sign bit
    esa_write(33, rows_m[33] ^ (112'(1) << 110));   // check bit
    make_inputs(v1, 8, 22);
    run_op(v1, lat);
    expect_results(v1, 3, 0);

    // double error: detected
    esa_write(8, rows_m[8] ^ (112'(1) << 1) ^ (112'(1) << 50));
    run_op(v1, lat);
    chk(uncorr == 1, "double error not flagged");
    chk(int'(corr) == 3, "corrected count with double error");
    for (int a = 0; a < WORDS; a++) esa_write(a, rows_m[a]);

    // overflow: large exponents
    load_weights(28, 30);
    make_inputs(v1, 28, 30);
    run_op(v1, lat);
    expect_results(v1, 0, 0);

    // underflow: small exponents
    load_weights(1, 3);
    make_inputs(v1, 1, 3);
    run_op(v1, lat);
    expect_results(v1, 0, 0);

    chk(n_ovf > 0, "overflow never happened");
    chk(n_unf > 0, "underflow never happened");
    $display("overflows=%0d underflows=%0d", n_ovf, n_unf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
