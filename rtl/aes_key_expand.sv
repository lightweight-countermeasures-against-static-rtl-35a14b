// aes_key_expand: one step of the AES-128 key schedule, computed on the fly.
//
// From round key i (words w0..w3, w0 = bits [127:96]) and the round constant
// of round i+1 it forms round key i+1:
//   t  = SubWord(RotWord(w3)) ^ {rcon, 24'h0}
//   w4 = w0 ^ t, w5 = w1 ^ w4, w6 = w2 ^ w5, w7 = w3 ^ w6.
// Four table S-boxes do SubWord. Combinational; the core keeps the current
// round key in a register and advances it once per round.
module aes_key_expand
  import aes_pkg::*;
(
  input  block_t key_in,
  input  byte_t  rcon,
  output block_t key_out
);

  word_t w0, w1, w2, w3, rot, sub, t, w4, w5, w6, w7;

  assign {w0, w1, w2, w3} = key_in;
  assign rot = {w3[23:0], w3[31:24]};

  for (genvar k = 0; k < 4; k++) begin : g_sub
    aes_sbox u_sbox (.a(rot[31 - 8*k -: 8]), .y(sub[31 - 8*k -: 8]));
  end

  assign t  = sub ^ {rcon, 24'h0};
  assign w4 = w0 ^ t;
  assign w5 = w1 ^ w4;
  assign w6 = w2 ^ w5;
  assign w7 = w3 ^ w6;
  assign key_out = {w4, w5, w6, w7};

endmodule
