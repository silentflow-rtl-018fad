// aes_round: one AES-128 encryption round without its key addition.
//
// Computes ShiftRows(SubBytes(state)) and, unless FINAL is set, MixColumns of
// the result. The round-key XOR is left out on purpose: the accelerator adds
// the round key after the round in a separate step (split AddRoundKey), so
// the round logic itself does not depend on the key. Purely combinational.
// Byte 0 of the state is bits [127:120]; the state is filled column by
// column as in FIPS-197.
module aes_round
  import sf_pkg::*;
#(
  parameter bit FINAL = 1'b0
) (
  input  blk_t state_in,
  output blk_t state_out
);

  logic [7:0] b   [16];
  logic [7:0] sb  [16];
  logic [7:0] sr  [16];
  logic [7:0] mc  [16];

  for (genvar i = 0; i < 16; i++) begin : g_sub
    assign b[i] = state_in[127-8*i -: 8];
    aes_sbox u_sbox (.in(b[i]), .out(sb[i]));
  end

  // ShiftRows: byte (row r, column c) sits at index r+4c and takes the byte
  // from column (c+r) mod 4 of the same row.
  always_comb begin
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sr[r+4*c] = sb[r + 4*((c+r)%4)];
  end

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      mc[4*c+0] = xtime(sr[4*c+0]) ^ (xtime(sr[4*c+1]) ^ sr[4*c+1]) ^ sr[4*c+2] ^ sr[4*c+3];
      mc[4*c+1] = sr[4*c+0] ^ xtime(sr[4*c+1]) ^ (xtime(sr[4*c+2]) ^ sr[4*c+2]) ^ sr[4*c+3];
      mc[4*c+2] = sr[4*c+0] ^ sr[4*c+1] ^ xtime(sr[4*c+2]) ^ (xtime(sr[4*c+3]) ^ sr[4*c+3]);
      mc[4*c+3] = (xtime(sr[4*c+0]) ^ sr[4*c+0]) ^ sr[4*c+1] ^ sr[4*c+2] ^ xtime(sr[4*c+3]);
    end
  end

  for (genvar i = 0; i < 16; i++) begin : g_out
    assign state_out[127-8*i -: 8] = FINAL ? sr[i] : mc[i];
  end

endmodule
