// tb_sign_processing_unit -- random input and weight signs against the XOR rule.
module tb_sign_processing_unit;
  localparam int ROWS = 256, COLS = 16;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic [ROWS-1:0] xs;
  logic [COLS-1:0] ws [ROWS];
  logic [COLS-1:0] ps [ROWS];

  sign_processing_unit dut (.x_sign(xs), .w_sign(ws), .p_sign(ps));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20) begin
      for (int r = 0; r < ROWS; r++) begin
        xs[r] = 1'($urandom);
        ws[r] = COLS'($urandom);
      end
      @(posedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (ps[r][c] != (xs[r] != ws[r][c])) begin
            failures++;
            $display("FAIL r=%0d c=%0d", r, c);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
