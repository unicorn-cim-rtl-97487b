// product_management -- turns a column's fixed-point sum back into FP16.
//
// The column sum has 20 fraction bits and is scaled by 2^(E_max - 30), E_max being the
// largest exponent sum (bias 2*15). The unit takes the magnitude, finds its leading one at
// bit L, and forms the FP16 result with biased exponent E_max - 15 + L - 20 and the 10
// bits below the leading one, truncated as the paper suggests ("such as truncation").
// This design's choices: a biased exponent of 31 or more saturates to infinity (overflow),
// one of 0 or less flushes to a signed zero (underflow), a zero sum gives +0.
//
// Interface and timing: purely combinational.
module product_management
  import unicorn_pkg::*;
#(
  parameter int unsigned SUM_W = PROD_W + 9
) (
  input  logic signed [SUM_W-1:0] sum,
  input  logic [ESUM_W-1:0]       emax,
  output fp16_t                   result,
  output logic                    overflow,
  output logic                    underflow
);

  localparam int FRAC = 2 * MAN_W;
  localparam int EMAX_FIELD = (1 << EXP_W) - 1;

  always_comb begin
    logic [SUM_W-1:0] mag;
    int               lead;
    int               e;
    mag  = sum[SUM_W-1] ? SUM_W'(-sum) : SUM_W'(sum);
    lead = 0;
    for (int i = 0; i < SUM_W; i++)
      if (mag[i]) lead = i;
    e    = int'(emax) - int'(BIAS) + lead - FRAC;
    result    = '0;
    overflow  = 1'b0;
    underflow = 1'b0;
    if (mag != '0) begin
      result.sign = sum[SUM_W-1];
      if (e >= EMAX_FIELD) begin
        result.exp = '1;
        overflow   = 1'b1;
      end else if (e <= 0) begin
        underflow  = 1'b1;
      end else begin
        result.exp = EXP_W'(e);
        // the 10 bits below the leading one, the rest truncated
        result.man = (lead >= int'(MAN_W)) ? MAN_W'(mag >> (lead - int'(MAN_W)))
                                           : MAN_W'(mag << (int'(MAN_W) - lead));
      end
    end
  end

endmodule
