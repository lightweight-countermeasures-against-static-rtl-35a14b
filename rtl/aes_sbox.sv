// aes_sbox: the AES SubBytes substitution as a 256-entry look-up table.
//
// The core is built with table S-boxes rather than composite-field logic; a
// look-up-table S-box is what the protected design was evaluated with. The
// table is a constant computed at elaboration by aes_pkg::gen_sbox(), so
// synthesis sees a 256x8 ROM indexed by the input byte. Purely combinational:
// y follows a in the same cycle.
module aes_sbox
  import aes_pkg::*;
(
  input  byte_t a,
  output byte_t y
);

  localparam sbox_table_t SBOX = gen_sbox();

  assign y = SBOX[a];

endmodule
