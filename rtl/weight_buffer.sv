// weight_buffer -- FIFO of weight-row writes on their way from memory to the macros.
//
// Each entry is one pre-encoded row write (macro, target array, row address, data),
// packed into W bits by the top. push adds an entry, pop removes the head; a push and a
// pop in the same cycle are both honoured. The paper only names a weight buffer; the FIFO
// organisation and its DEPTH are this design's choices.
//
// Interface and timing: synchronous, asynchronous active-low reset; head is valid while
// empty is low. Pushing when full or popping when empty is a protocol error (asserted).
module weight_buffer #(
  parameter int unsigned W     = 180,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         pop,
  output logic [W-1:0] head,
  output logic         empty
);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   count;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign head  = mem[rd];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wr <= (wr == AW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      if (pop && !empty) rd <= (rd == AW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("weight_buffer: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("weight_buffer: pop while empty");

endmodule
