// aes_sbox: the AES SubBytes look-up table for one byte.
//
// The 256-entry table is filled at elaboration from the S-box definition
// (GF(2^8) inverse followed by the affine map, sf_pkg::SBOX) and is
// then a plain read-only table, the "precomputed S-box values kept in local
// RAM" of the accelerator's AES engine. Purely combinational: out = S[in].
module aes_sbox
  import sf_pkg::*;
(
  input  logic [7:0] in,
  output logic [7:0] out
);

  assign out = SBOX[in];

endmodule
