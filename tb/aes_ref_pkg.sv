// aes_ref_pkg: an independent AES-128 reference model for the testbenches.
//
// It shares no code with the RTL. The S-box is built by brute force: for
// every non-zero a it searches the b with a*b = 1 in GF(2^8) (multiplication
// by the bit-serial "Russian peasant" method) and then applies the affine map
// bit by bit, s_i = b_i ^ b_(i+4) ^ b_(i+5) ^ b_(i+6) ^ b_(i+7) ^ c_i with
// c = 8'h63. The state is kept as a 4x4 byte matrix st[row][col].
package aes_ref_pkg;

  typedef logic [7:0] b8;
  typedef b8 mat_t [4][4];

  b8 sbox_t [256];
  bit sbox_ready = 0;

  function automatic b8 rmul(b8 a, b8 b);
    b8 p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      b = b >> 1;
      if (a[7]) a = (a << 1) ^ 8'h1b; else a = a << 1;
    end
    return p;
  endfunction

  function automatic void build_sbox();
    for (int a = 0; a < 256; a++) begin
      b8 inv = 0;
      b8 s;
      if (a != 0)
        for (int b = 1; b < 256; b++)
          if (rmul(b8'(a), b8'(b)) == 8'h01) inv = b8'(b);
      for (int i = 0; i < 8; i++)
        s[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8] ^ (8'h63 >> i);
      sbox_t[a] = s;
    end
    sbox_ready = 1;
  endfunction

  function automatic b8 sbox(b8 a);
    if (!sbox_ready) build_sbox();
    return sbox_t[a];
  endfunction

  function automatic mat_t to_mat(logic [127:0] v);
    mat_t m;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        m[r][c] = v[127 - 8*(4*c + r) -: 8];
    return m;
  endfunction

  function automatic logic [127:0] from_mat(mat_t m);
    logic [127:0] v;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        v[127 - 8*(4*c + r) -: 8] = m[r][c];
    return v;
  endfunction

  function automatic logic [127:0] round(logic [127:0] st, logic [127:0] rk, bit last);
    mat_t a = to_mat(st), b, c, k = to_mat(rk);
    for (int r = 0; r < 4; r++)
      for (int col = 0; col < 4; col++)
        b[r][col] = sbox(a[r][(col + r) % 4]);
    for (int col = 0; col < 4; col++)
      for (int r = 0; r < 4; r++) begin
        if (last) c[r][col] = b[r][col];
        else c[r][col] = rmul(8'h02, b[r][col]) ^ rmul(8'h03, b[(r+1)%4][col])
                       ^ b[(r+2)%4][col] ^ b[(r+3)%4][col];
        c[r][col] ^= k[r][col];
      end
    return from_mat(c);
  endfunction

  function automatic logic [127:0] expand(logic [127:0] k, b8 rc);
    logic [31:0] w [8];
    logic [31:0] t;
    for (int i = 0; i < 4; i++) w[i] = k[127 - 32*i -: 32];
    t = {sbox(w[3][23:16]) ^ rc, sbox(w[3][15:8]), sbox(w[3][7:0]), sbox(w[3][31:24])};
    for (int i = 4; i < 8; i++) begin
      w[i] = w[i-4] ^ t;
      t = w[i];
    end
    return {w[4], w[5], w[6], w[7]};
  endfunction

  function automatic logic [127:0] encrypt(logic [127:0] key, logic [127:0] pt);
    logic [127:0] st = pt ^ key, rk = key;
    b8 rc = 8'h01;
    for (int r = 1; r <= 10; r++) begin
      rk = expand(rk, rc);
      st = round(st, rk, r == 10);
      rc = rmul(rc, 8'h02);
    end
    return st;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
