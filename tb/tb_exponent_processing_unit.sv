// tb_exponent_processing_unit -- random inputs (some zero) and shared exponents (some
// zero); E_max is checked against the maximum taken over all rows at once (no blocks)
// and every aligned mantissa against its direct definition.
module tb_exponent_processing_unit;
  import unicorn_pkg::*;
  localparam int ROWS = 256, COLS = 16, N = 8, NBLK = 32;

  logic clk = 0;
  int checks = 0, failures = 0;
  fp16_t      x [ROWS];
  logic [4:0] w_exp [NBLK][COLS];
  logic [5:0] esum [ROWS][COLS];
  logic [5:0] emax [COLS];
  logic [10:0] aligned [ROWS][COLS];
  int shifted_out = 0;

  exponent_processing_unit dut (.x(x), .w_exp(w_exp), .esum(esum), .emax(emax), .aligned(aligned));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        x[r] = fp16_t'(16'($urandom));
        if (x[r].exp == 31) x[r].exp = 30;
        if ($urandom_range(9) == 0) x[r].exp = 0;
        if (t % 2 == 1) x[r].exp = 5'($urandom_range(20, 8));
      end
      for (int b = 0; b < NBLK; b++)
        for (int c = 0; c < COLS; c++) begin
          w_exp[b][c] = 5'($urandom_range(30));
          if ($urandom_range(15) == 0) w_exp[b][c] = 0;
        end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) esum[r][c] = 6'(x[r].exp) + 6'(w_exp[r/N][c]);
      #1;
      for (int c = 0; c < COLS; c++) begin
        int m;
        m = 0;
        for (int r = 0; r < ROWS; r++)
          if (x[r].exp != 0 && w_exp[r/N][c] != 0 && int'(esum[r][c]) > m) m = int'(esum[r][c]);
        chk(int'(emax[c]) == m, $sformatf("emax c=%0d %0d vs %0d", c, emax[c], m));
        for (int r = 0; r < ROWS; r++) begin
          int d;
          int a;
          d = m - int'(esum[r][c]);
          a = (x[r].exp == 0 || w_exp[r/N][c] == 0 || d >= 11) ? 0 : (1024 + int'(x[r].man)) / (1 << d);
          if (x[r].exp != 0 && w_exp[r/N][c] != 0 && d >= 11) shifted_out++;
          chk(int'(aligned[r][c]) == a, $sformatf("aligned r=%0d c=%0d %0d vs %0d", r, c, aligned[r][c], a));
        end
      end
      @(posedge clk);
    end
    chk(shifted_out > 0, "no mantissa shifted out completely");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
