// tb_one4n_ecc_encoder -- checks the check bits of random and directed payloads against
// an independent Hamming model (XOR of the positions of the set bits).
module tb_one4n_ecc_encoder;
  import tb_ref_pkg::*;

  logic clk = 0;
  int checks = 0, failures = 0;
  logic [103:0] data;
  logic [7:0]   code;

  one4n_ecc_encoder dut (.data(data), .code(code));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(logic [103:0] d);
    data = d;
    @(posedge clk);
    checks++;
    if (code !== ref_encode(d)) begin
      failures++;
      $display("FAIL data=%h code=%h expected=%h", d, code, ref_encode(d));
    end
  endtask

  initial begin
    check_one('0);
    check_one('1);
    for (int j = 0; j < 104; j++) check_one(104'(1) << j);
    repeat (500) check_one({$urandom, $urandom, $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
