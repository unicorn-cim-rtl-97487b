// tb_cim_controller -- drives the controller with a model of the weight buffer (a write
// counter) and of the macro pipeline (valid LATENCY cycles after macro_start): checks
// that queued writes are drained first, that a start arriving early waits and is not
// lost, that capture and done follow valid, and the busy flag.
module tb_cim_controller;
  localparam int LATENCY = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic wb_empty, wb_pop, macro_start, macro_valid, capture, busy, done;
  int queued = 0;
  logic [LATENCY-1:0] pipe = '0;
  int checks = 0, failures = 0, n_waits = 0, n_ops = 0;

  cim_controller #(.LATENCY(LATENCY)) dut (.clk(clk), .rst_n(rst_n), .start(start),
    .wb_empty(wb_empty), .wb_pop(wb_pop), .macro_start(macro_start), .macro_valid(macro_valid),
    .capture(capture), .busy(busy), .done(done));

  assign wb_empty    = (queued == 0);
  assign macro_valid = pipe[LATENCY-1];

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    pipe <= {pipe[LATENCY-2:0], macro_start};
    if (wb_pop) queued <= queued - 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
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

  // Requests an operation with nwr writes queued; returns cycles from start to done.
  task automatic op(int nwr, output int cyc);
    int pops = 0;
    bit saw_start = 0, saw_capture = 0;
    @(negedge clk);
    queued = nwr;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      if (wb_pop) pops++;
      if (macro_start) begin
        chk(queued == 0, "macro started with writes queued");
        saw_start = 1;
      end
      if (capture) saw_capture = 1;
      chk(busy || done, "busy dropped during operation");
      @(negedge clk);
      cyc++;
    end
    chk(saw_capture, "no capture");
    chk(pops + (nwr > 0 ? 1 : 0) >= nwr, "writes not drained");
    if (nwr > 0) n_waits++;
    n_ops++;
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy, "busy after reset");
    op(0, cyc);
    // start in cycle 0 -> macro_start same cycle -> valid after 4 -> done one later
    chk(cyc == LATENCY + 1, $sformatf("idle operation took %0d cycles", cyc));
    op(5, cyc);
    chk(cyc == 5 + LATENCY + 1, $sformatf("operation after 5 writes took %0d cycles", cyc));
    repeat (20) begin
      int nw;
      nw = $urandom_range(10);
      op(nw, cyc);
      chk(cyc == nw + LATENCY + 1, $sformatf("operation after %0d writes took %0d cycles", nw, cyc));
      @(negedge clk);
      chk(!busy, "busy while idle");
    end
    chk(n_waits > 0, "a start never waited for writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
