// one4n_ecc_decoder -- ECC circuit of the One4N scheme: single error correction,
// double error detection on one stored ECC row.
//
// The stored payload is re-encoded (one4n_ecc_encoder) into a check_sum, which is XORed
// with the stored code into the 8-bit syndrome R, as in the paper:
//   R == 0                      no error;
//   R[7] == 1                   single error at codeword position R[6:0], corrected by
//                               flipping that bit (position 0 is P7 itself);
//   R[7] == 0, R[6:0] != 0      two or more errors, detected, not corrected.
// R[7] is the parity of all stored bits. Because the encoder's P7 is formed over the
// recomputed P6..P0, R[7] is the encoder difference corrected by the parity of R[6:0].
// A position beyond the last codeword position with R[7] == 1 cannot be a single error
// and is reported as uncorrectable (this design's choice).
//
// Interface: purely combinational; data_out is the corrected payload.
module one4n_ecc_decoder
  import unicorn_pkg::*;
#(
  parameter int unsigned DATA_W = ECC_DATA_W,
  parameter int unsigned POS_W  = ham_pos_bits(DATA_W),
  parameter int unsigned CODE_W = POS_W + 1
) (
  input  logic [DATA_W-1:0] data_in,
  input  logic [CODE_W-1:0] code_in,
  output logic [DATA_W-1:0] data_out,
  output logic [CODE_W-1:0] syndrome,
  output logic              err_single,
  output logic              err_multi
);

  localparam int unsigned LAST_POS = DATA_W + POS_W;  // highest codeword position

  logic [CODE_W-1:0] check_sum;
  logic [POS_W-1:0]  r_pos;
  logic              r_all;

  one4n_ecc_encoder #(.DATA_W(DATA_W), .POS_W(POS_W), .CODE_W(CODE_W)) u_reencode (
    .data (data_in),
    .code (check_sum)
  );

  assign r_pos    = check_sum[POS_W-1:0] ^ code_in[POS_W-1:0];
  assign r_all    = check_sum[CODE_W-1] ^ code_in[CODE_W-1] ^ (^r_pos);
  assign syndrome = {r_all, r_pos};

  // Flip the payload bit whose codeword position the syndrome names.
  for (genvar j = 0; j < DATA_W; j++) begin : g_fix
    localparam logic [POS_W-1:0] POS = POS_W'(ham_pos(j));
    assign data_out[j] = data_in[j] ^ (r_all && (r_pos == POS));
  end

  always_comb begin
    err_single = r_all && (int'(r_pos) <= LAST_POS);
    err_multi  = (!r_all && (r_pos != '0)) || (r_all && (int'(r_pos) > LAST_POS));
  end

endmodule
