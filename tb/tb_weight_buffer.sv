// tb_weight_buffer -- random push/pop traffic against a queue model: order, full and
// empty flags, filling to DEPTH, simultaneous push and pop.
module tb_weight_buffer;
  localparam int W = 180, DEPTH = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, head;
  logic full, empty;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, n_full = 0, n_both = 0;

  weight_buffer #(.W(W), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .push(push), .din(din),
    .full(full), .pop(pop), .head(head), .empty(empty));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int bias;
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == DEPTH), "full flag");
      if (q.size() > 0) chk(head == q[0], "head");
      if (full) n_full++;
      bias = ((i / 500) % 2 == 0) ? 3 : 1;  // alternate filling and draining phases
      push = ($urandom_range(3) < bias) && !full;
      pop  = ($urandom_range(3) >= bias) && !empty;
      if ($urandom_range(9) == 0) begin
        push = !full;
        pop  = !empty;
      end
      if (push && pop) n_both++;
      din = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    chk(n_full > 0, "buffer never full");
    chk(n_both > 0, "never push and pop together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
