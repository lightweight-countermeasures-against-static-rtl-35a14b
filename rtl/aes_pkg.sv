// aes_pkg: types and constant functions shared by the AES-128 encryption core.
//
// The 128-bit state and key use FIPS-197 byte order: byte 0 is bits [127:120],
// and state byte s[r][c] (row r, column c) is byte r+4c. The S-box table is
// not written out as numbers: gen_sbox() computes it at elaboration from its
// definition, the multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1
// (taken as a^254, with 0 mapped to 0) followed by the affine map
// b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 8'h63.
// The functions here are standard AES; nothing in them is specific to the
// static-power countermeasure.
package aes_pkg;

  typedef logic [7:0]   byte_t;
  typedef logic [31:0]  word_t;
  typedef logic [127:0] block_t;
  typedef byte_t sbox_table_t [256];

  localparam int unsigned NR = 10;  // AES-128 round count

  // Multiply by x in GF(2^8).
  function automatic byte_t xtime(byte_t a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  // General multiplication in GF(2^8).
  function automatic byte_t gmul(byte_t a, byte_t b);
    byte_t p = '0;
    byte_t x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic byte_t rotl8(byte_t b, int unsigned n);
    return byte_t'((b << n) | (b >> (8 - n)));
  endfunction

  // Forward S-box from its definition.
  function automatic byte_t sbox_calc(byte_t a);
    byte_t inv = 8'h01;
    byte_t sq  = a;
    // a^254 = a^(2+4+8+16+32+64+128)
    for (int i = 1; i < 8; i++) begin
      sq  = gmul(sq, sq);
      inv = gmul(inv, sq);
    end
    if (a == 8'h00) inv = 8'h00;
    return inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
  endfunction

  function automatic sbox_table_t gen_sbox();
    sbox_table_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(byte_t'(i));
    return t;
  endfunction

  // Byte k (FIPS-197 order) of a block.
  function automatic byte_t get_byte(block_t b, int unsigned k);
    return b[127 - 8*k -: 8];
  endfunction

endpackage
