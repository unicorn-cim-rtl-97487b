// input_buffer -- holds the FP16 input vector of one MAC operation.
//
// One entry per input channel (ROWS entries), written one word per cycle from the
// memory side and read by all macros in parallel, so the same input is reused across all
// weights of a row, as the paper's data flow requires. The paper only names the buffer;
// the register array with reset to +0 is this design's choice.
//
// Interface and timing: synchronous write (we/waddr/wdata), asynchronous active-low
// reset, combinational parallel read x.
module input_buffer
  import unicorn_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp16_t         wdata,
  output fp16_t         x [ROWS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) x[r] <= '0;
    end else if (we) begin
      x[waddr] <= wdata;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) we |-> int'(waddr) < ROWS)
    else $error("input_buffer: write address out of range");

endmodule
