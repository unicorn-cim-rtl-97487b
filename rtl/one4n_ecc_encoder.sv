// one4n_ecc_encoder -- Hamming check-bit generator of the One4N ECC.
//
// Computes the 8 check bits {P7..P0} of one ECC row of DATA_W payload bits (shared
// exponents and sign bits of a weight block). P_k (k < POS_W) is the XOR of the payload
// bits whose codeword position has bit k set; P7 is the XOR of the payload and P6..P0,
// so the whole codeword has even parity. In the paper the code is computed offline and
// stored next to the weights; the ECC circuit re-encodes the stored payload "in the same
// manner" to obtain its check_sum, which is why the decoder instantiates this module.
// The bit placement (see unicorn_pkg) is this design's choice.
//
// Interface: purely combinational, data -> code.
module one4n_ecc_encoder
  import unicorn_pkg::*;
#(
  parameter int unsigned DATA_W = ECC_DATA_W,
  parameter int unsigned POS_W  = ham_pos_bits(DATA_W),
  parameter int unsigned CODE_W = POS_W + 1
) (
  input  logic [DATA_W-1:0] data,
  output logic [CODE_W-1:0] code
);

  // Payload bits covered by position parity k.
  function automatic logic [DATA_W-1:0] cover_mask(int unsigned k);
    logic [DATA_W-1:0] m = '0;
    for (int unsigned j = 0; j < DATA_W; j++)
      m[j] = ((ham_pos(j) >> k) & 1) != 0;
    return m;
  endfunction

  logic [POS_W-1:0] pos_par;

  for (genvar k = 0; k < POS_W; k++) begin : g_par
    localparam logic [DATA_W-1:0] MASK = cover_mask(k);
    assign pos_par[k] = ^(data & MASK);
  end

  assign code = {(^data) ^ (^pos_par), pos_par};

  initial begin
    assert (CODE_W == POS_W + 1)
      else $error("one4n_ecc_encoder: CODE_W must be POS_W + 1");
    assert ((1 << POS_W) >= DATA_W + POS_W + 1)
      else $error("one4n_ecc_encoder: POS_W too small for DATA_W");
  end

endmodule
