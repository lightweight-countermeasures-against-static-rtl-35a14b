// aes_round: one combinational AES encryption round.
//
// state_out = AddRoundKey(MixColumns(ShiftRows(SubBytes(state_in))), round_key),
// with MixColumns left out when final_round is set (round 10 of AES-128).
// Sixteen table S-boxes (aes_sbox) do SubBytes. ShiftRows rotates row r left
// by r positions; MixColumns multiplies each column by the fixed matrix
// [2 3 1 1; 1 2 3 1; 1 1 2 3; 3 1 1 2] over GF(2^8). Byte order is FIPS-197
// (byte 0 = bits [127:120], byte r+4c = row r, column c). This is a regular,
// unprotected AES round; the countermeasure acts only on the state register
// that holds this round's result.
module aes_round
  import aes_pkg::*;
(
  input  block_t state_in,
  input  block_t round_key,
  input  logic   final_round,
  output block_t state_out
);

  byte_t sb  [16];
  byte_t sr  [16];
  byte_t mc  [16];

  for (genvar k = 0; k < 16; k++) begin : g_sbox
    aes_sbox u_sbox (.a(get_byte(state_in, k)), .y(sb[k]));
  end

  // ShiftRows: out[r][c] = in[r][(c+r) mod 4]
  always_comb begin
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        sr[r + 4*c] = sb[r + 4*((c + r) % 4)];
  end

  // MixColumns
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      byte_t a0, a1, a2, a3;
      a0 = sr[4*c];   a1 = sr[4*c+1];
      a2 = sr[4*c+2]; a3 = sr[4*c+3];
      mc[4*c]   = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      mc[4*c+1] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      mc[4*c+2] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      mc[4*c+3] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
  end

  always_comb begin
    for (int k = 0; k < 16; k++)
      state_out[127 - 8*k -: 8] = (final_round ? sr[k] : mc[k]) ^ get_byte(round_key, k);
  end

endmodule
