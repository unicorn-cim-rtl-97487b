// tb_product_management -- directed cases (exact powers of two, zero, overflow,
// underflow, truncation) and random sums against the reference normaliser.
module tb_product_management;
  import tb_ref_pkg::*;
  localparam int SUM_W = 31;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic signed [SUM_W-1:0] sum;
  logic [5:0]  emax;
  logic [15:0] res;
  logic ovf, unf;

  product_management #(.SUM_W(SUM_W)) dut (.sum(sum), .emax(emax), .result(res),
                                           .overflow(ovf), .underflow(unf));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint s, int e, logic [15:0] expect_res = 16'hxxxx, bit use_expect = 0);
    bit eo, eu;
    logic [15:0] r;
    sum  = SUM_W'(s);
    emax = 6'(e);
    r = ref_norm(s, e, eo, eu);
    @(posedge clk);
    checks++;
    if (res != r || ovf != eo || unf != eu || (use_expect && res != expect_res)) begin
      failures++;
      $display("FAIL s=%0d emax=%0d res=%h ovf=%b unf=%b expected=%h %b %b", s, e, res, ovf, unf, r, eo, eu);
    end
  endtask

  initial begin
    // 1.0 * 1.0 with both exponents 15: sum = 2^20, emax = 30 -> 1.0 = 0x3C00
    run(longint'(1) << 20, 30, 16'h3C00, 1);
    // -1.5 * 1.0 -> 0xBE00
    run(-(longint'(3) << 19), 30, 16'hBE00, 1);
    // two products of 1.0 -> 2.0 = 0x4000
    run(longint'(2) << 20, 30, 16'h4000, 1);
    // zero
    run(0, 30, 16'h0000, 1);
    // overflow: 2^20 with emax = 60 -> exponent 45 -> inf
    run(longint'(1) << 20, 60, 16'h7C00, 1);
    // underflow: 2^20 with emax = 10 -> exponent -5 -> zero with sign
    run(-(longint'(1) << 20), 10, 16'h8000, 1);
    // small sum below the hidden-bit position (left shift path)
    run(5, 40, 16'hxxxx, 0);
    // truncation: 1 + 2^-10 + 2^-11 (in 20-fraction-bit units) -> keeps 1 + 2^-10
    run((longint'(1) << 20) + (1 << 10) + (1 << 9), 30, 16'h3C01, 1);
    repeat (2000) begin
      longint s;
      s = longint'($signed($urandom)) >>> $urandom_range(31, 1);
      run(s, $urandom_range(63));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
