// tb_adder_tree -- random signed product sets, all-positive and all-negative maxima,
// against a sequential sum.
module tb_adder_tree;
  localparam int LEN = 256, IN_W = 22, OUT_W = IN_W + 8 + 1;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic [IN_W-1:0] mag [LEN];
  logic [LEN-1:0]  neg;
  logic signed [OUT_W-1:0] sum;

  adder_tree #(.LEN(LEN), .IN_W(IN_W)) dut (.mag(mag), .neg(neg), .sum(sum));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int mode);
    longint ref_s = 0;
    for (int i = 0; i < LEN; i++) begin
      mag[i] = (mode == 0) ? IN_W'($urandom) : '1;
      neg[i] = (mode == 0) ? 1'($urandom) : (mode == 2);
      ref_s += neg[i] ? -longint'(mag[i]) : longint'(mag[i]);
    end
    @(posedge clk);
    checks++;
    if (longint'(sum) != ref_s) begin
      failures++;
      $display("FAIL mode=%0d sum=%0d expected=%0d", mode, sum, ref_s);
    end
  endtask

  initial begin
    run(1);
    run(2);
    repeat (200) run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
