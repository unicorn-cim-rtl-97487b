// tb_input_buffer -- reset value, random writes to every entry and overwrites, checked
// against a shadow copy through the parallel read port.
module tb_input_buffer;
  import unicorn_pkg::*;
  localparam int ROWS = 256;
  logic clk = 0, rst_n = 0, we = 0;
  logic [7:0] waddr = '0;
  fp16_t wdata = '0;
  fp16_t x [ROWS];
  logic [15:0] shadow [ROWS];
  int checks = 0, failures = 0;

  input_buffer dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata), .x(x));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (x[r] != shadow[r]) begin
        failures++;
        if (failures < 10) $display("FAIL %s r=%0d %h vs %h", what, r, x[r], shadow[r]);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) shadow[r] = '0;
    repeat (2) @(negedge clk);
    compare("reset");
    rst_n = 1;
    repeat (3) begin
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        we = 1; waddr = 8'($urandom); wdata = fp16_t'(16'($urandom));
        shadow[waddr] = wdata;
      end
      @(negedge clk);
      we = 0;
      @(negedge clk);
      compare("writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
