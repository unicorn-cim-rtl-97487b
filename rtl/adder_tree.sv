// adder_tree -- signed accumulation of one column's mantissa products.
//
// Each of the LEN inputs is a product magnitude with its sign from the XOR array; the
// tree negates the negative ones and adds all of them pairwise in ceil(log2 LEN) levels,
// at full width so nothing is lost (OUT_W = IN_W + ceil(log2 LEN) + 1). The paper names
// the adder tree only; the binary tree without truncation is this design's choice.
//
// Interface and timing: purely combinational.
module adder_tree #(
  parameter int unsigned LEN   = 256,
  parameter int unsigned IN_W  = 22,
  localparam int unsigned LVLS  = (LEN > 1) ? $clog2(LEN) : 1,
  localparam int unsigned PLEN  = 1 << LVLS,
  localparam int unsigned OUT_W = IN_W + LVLS + 1
) (
  input  logic [IN_W-1:0]         mag [LEN],
  input  logic [LEN-1:0]          neg,
  output logic signed [OUT_W-1:0] sum
);

  // Level l holds PLEN >> l partial sums; each level adds neighbouring pairs.
  always_comb begin
    logic signed [OUT_W-1:0] acc [PLEN];
    for (int i = 0; i < PLEN; i++) begin
      if (i < int'(LEN))
        acc[i] = neg[i] ? -$signed(OUT_W'(mag[i])) : $signed(OUT_W'(mag[i]));
      else
        acc[i] = '0;
    end
    for (int l = 0; l < int'(LVLS); l++)
      for (int i = 0; i < (PLEN >> (l + 1)); i++)
        acc[i] = acc[2*i] + acc[2*i+1];
    sum = acc[0];
  end

endmodule
