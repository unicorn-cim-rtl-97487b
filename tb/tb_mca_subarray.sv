// tb_mca_subarray -- writes random mantissa rows, then checks every product of random
// aligned inputs with 1.W_M (0.W_M for zero blocks) against integer multiplication.
module tb_mca_subarray;
  localparam int ROWS = 256, COLS = 16, N = 8, NBLK = 32;

  logic clk = 0;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [7:0] waddr = '0;
  logic [159:0] wdata = '0;
  logic [10:0] aligned [ROWS][COLS];
  logic [COLS-1:0] w_nz [NBLK];
  logic [21:0] prod [ROWS][COLS];
  logic [9:0] wm [ROWS][COLS];

  mca_subarray dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .aligned(aligned),
                    .w_nz(w_nz), .prod(prod));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        wm[r][c] = 10'($urandom);
        wdata[10*c +: 10] = wm[r][c];
      end
      we = 1; waddr = 8'(r);
    end
    @(negedge clk);
    we = 0;
    repeat (5) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) aligned[r][c] = 11'($urandom);
      for (int b = 0; b < NBLK; b++) w_nz[b] = 16'($urandom);
      #1;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int e;
          e = int'(aligned[r][c]) * ((w_nz[r/N][c] ? 1024 : 0) + int'(wm[r][c]));
          checks++;
          if (int'(prod[r][c]) != e) begin
            failures++;
            if (failures < 20) $display("FAIL r=%0d c=%0d %0d vs %0d", r, c, prod[r][c], e);
          end
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
