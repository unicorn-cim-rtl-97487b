// tb_one4n_ecc_decoder -- clean rows, every single-bit error (payload and check bits)
// and random double errors: single errors must be corrected with the syndrome naming
// their position, double errors must be flagged and left uncorrected.
module tb_one4n_ecc_decoder;
  import tb_ref_pkg::*;

  logic clk = 0;
  int checks = 0, failures = 0;
  logic [103:0] din, dout;
  logic [7:0]   cin, syn;
  logic         es, em;

  one4n_ecc_decoder dut (.data_in(din), .code_in(cin), .data_out(dout), .syndrome(syn),
                         .err_single(es), .err_multi(em));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s din=%h cin=%h dout=%h syn=%h es=%b em=%b", what, din, cin, dout, syn, es, em);
    end
  endtask

  // Flat codeword bit k: 0..103 payload, 104..111 check bits P0..P7.
  function automatic int pos_of(int k);
    if (k < 104) return ref_pos(k);
    if (k < 111) return 1 << (k - 104);
    return 0;
  endfunction

  initial begin
    logic [103:0] d;
    logic [111:0] cwd, bad;
    for (int t = 0; t < 40; t++) begin
      d   = {$urandom, $urandom, $urandom, $urandom};
      cwd = {ref_encode(d), d};
      {cin, din} = cwd;
      @(posedge clk);
      chk(dout == d && syn == 0 && !es && !em, "clean");
      for (int k = 0; k < 112; k++) begin
        bad = cwd ^ (112'(1) << k);
        {cin, din} = bad;
        @(posedge clk);
        chk(dout == d && es && !em && syn == {1'b1, 7'(pos_of(k))}, "single");
      end
      for (int t2 = 0; t2 < 20; t2++) begin
        int a, b;
        a = $urandom_range(111);
        do b = $urandom_range(111); while (b == a);
        bad = cwd ^ (112'(1) << a) ^ (112'(1) << b);
        {cin, din} = bad;
        @(posedge clk);
        chk(em && !es && syn[7] == 0 && syn[6:0] != 0, "double");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
