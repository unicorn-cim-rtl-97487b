// output_buffer -- holds the FP16 results of the last MAC operation of all macros.
//
// capture loads all WORDS results at once (word m*COLS + c is column c of macro m);
// the memory side reads them one word at a time. The paper mentions output buffers
// among the peripherals; this register array is this design's choice.
//
// Interface and timing: synchronous capture, asynchronous active-low reset to +0,
// combinational read dout = word raddr.
module output_buffer
  import unicorn_pkg::*;
#(
  parameter int unsigned WORDS = 64,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          capture,
  input  fp16_t         din [WORDS],
  input  logic [AW-1:0] raddr,
  output fp16_t         dout
);

  fp16_t mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WORDS; i++) mem[i] <= '0;
    end else if (capture) begin
      mem <= din;
    end
  end

  assign dout = (int'(raddr) < WORDS) ? mem[raddr] : '0;

endmodule
