// tb_esa_subarray -- writes pre-encoded One4N rows for all 32 blocks, then checks the
// corrected shared exponents, signs, exponent sums and ECC flags with no error, with a
// single error in a few rows (must be corrected) and a double error (must be flagged).
module tb_esa_subarray;
  import tb_ref_pkg::*;
  localparam int ROWS = 256, COLS = 16, N = 8, NBLK = 32, WORDS = 64;

  logic clk = 0;
  int checks = 0, failures = 0;
  logic         we = 0;
  logic [5:0]   waddr = '0;
  logic [111:0] wdata = '0;
  logic [4:0]   x_exp [ROWS];
  logic [4:0]   w_exp [NBLK][COLS];
  logic [COLS-1:0] w_sign [ROWS];
  logic [5:0]   esum [ROWS][COLS];
  logic [WORDS-1:0] cs, cm;

  esa_subarray dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .x_exp(x_exp),
                    .w_exp(w_exp), .w_sign(w_sign), .esum(esum), .cw_single(cs), .cw_multi(cm));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int we_m [NBLK][COLS];
  bit ws_m [NBLK][8][16];
  logic [111:0] rows_m [WORDS];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic write_row(int a, logic [111:0] d);
    @(negedge clk);
    we = 1; waddr = 6'(a); wdata = d;
    @(negedge clk);
    we = 0;
  endtask

  task automatic check_all(logic [WORDS-1:0] exp_s, logic [WORDS-1:0] exp_m, int skip_blk);
    for (int r = 0; r < ROWS; r++) x_exp[r] = 5'($urandom);
    #1;
    chk(cs == exp_s, $sformatf("single flags %h vs %h", cs, exp_s));
    chk(cm == exp_m, $sformatf("multi flags %h vs %h", cm, exp_m));
    for (int b = 0; b < NBLK; b++) begin
      if (b == skip_blk) continue;
      for (int c = 0; c < COLS; c++) chk(int'(w_exp[b][c]) == we_m[b][c], $sformatf("w_exp b=%0d c=%0d", b, c));
    end
    for (int r = 0; r < ROWS; r++) begin
      if (r / N == skip_blk) continue;
      for (int c = 0; c < COLS; c++) begin
        chk(w_sign[r][c] == ws_m[r/N][r%N][c], $sformatf("sign r=%0d c=%0d", r, c));
        chk(int'(esum[r][c]) == int'(x_exp[r]) + we_m[r/N][c], $sformatf("esum r=%0d c=%0d", r, c));
      end
    end
  endtask

  initial begin
    for (int b = 0; b < NBLK; b++) begin
      logic [207:0] p;
      for (int c = 0; c < COLS; c++) we_m[b][c] = $urandom_range(31);
      for (int n = 0; n < 8; n++) for (int c = 0; c < 16; c++) ws_m[b][n][c] = 1'($urandom);
      p = ref_payload(we_m[b], ws_m[b]);
      rows_m[2*b]   = ref_esa_row(p, 0);
      rows_m[2*b+1] = ref_esa_row(p, 1);
    end
    for (int a = 0; a < WORDS; a++) write_row(a, rows_m[a]);
    check_all('0, '0, -1);
    // single errors in three rows, one of them in a check bit
    write_row(3,  rows_m[3]  ^ (112'(1) << 17));
    write_row(40, rows_m[40] ^ (112'(1) << 0));
    write_row(63, rows_m[63] ^ (112'(1) << 108));
    check_all((64'(1) << 3) | (64'(1) << 40) | (64'(1) << 63), '0, -1);
    // double error in row 10 (block 5): flagged, block 5 not checked
    write_row(10, rows_m[10] ^ (112'(1) << 2) ^ (112'(1) << 90));
    check_all((64'(1) << 3) | (64'(1) << 40) | (64'(1) << 63), 64'(1) << 10, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
