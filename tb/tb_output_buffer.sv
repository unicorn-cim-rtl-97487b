// tb_output_buffer -- reset value, capture of random result sets, and that the buffer
// holds its contents while capture is low.
module tb_output_buffer;
  import unicorn_pkg::*;
  localparam int WORDS = 64;
  logic clk = 0, rst_n = 0, capture = 0;
  fp16_t din [WORDS];
  logic [5:0] raddr = '0;
  fp16_t dout;
  logic [15:0] shadow [WORDS];
  int checks = 0, failures = 0;

  output_buffer dut (.clk(clk), .rst_n(rst_n), .capture(capture), .din(din), .raddr(raddr), .dout(dout));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int i = 0; i < WORDS; i++) begin
      raddr = 6'(i);
      #1;
      checks++;
      if (dout != shadow[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s i=%0d %h vs %h", what, i, dout, shadow[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < WORDS; i++) begin shadow[i] = '0; din[i] = fp16_t'(16'($urandom)); end
    repeat (2) @(negedge clk);
    compare("reset");
    rst_n = 1;
    repeat (5) begin
      @(negedge clk);
      for (int i = 0; i < WORDS; i++) begin din[i] = fp16_t'(16'($urandom)); shadow[i] = din[i]; end
      capture = 1;
      @(negedge clk);
      capture = 0;
      for (int i = 0; i < WORDS; i++) din[i] = fp16_t'(16'($urandom));
      @(negedge clk);
      compare("capture");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
