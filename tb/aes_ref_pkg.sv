// aes_ref_pkg -- plain behavioural AES reference for the testbenches.
//
// Written independently of the RTL: the S-box finds the multiplicative inverse by
// exhaustive search (y with x*y = 1) instead of exponentiation, the inverse S-box
// by searching the forward one, and the cipher works on a 4x4 state array with
// whole-state ShiftRows/MixColumns in the textbook order. Keys are left-aligned in
// 256 bits as in the RTL.
package aes_ref_pkg;

  function automatic logic [7:0] r_xt(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] r_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p = 0;
    for (int i = 7; i >= 0; i--) begin
      p = r_xt(p);
      if (b[i]) p ^= a;
    end
    return p;
  endfunction

  function automatic logic [7:0] r_sbox(logic [7:0] x);
    logic [7:0] inv = 0;
    logic [7:0] s;
    for (int y = 1; y < 256; y++) if (r_mul(x, 8'(y)) == 8'h01) inv = 8'(y);
    // affine transform, written out as the matrix rows
    s[0] = inv[0] ^ inv[4] ^ inv[5] ^ inv[6] ^ inv[7];
    s[1] = inv[0] ^ inv[1] ^ inv[5] ^ inv[6] ^ inv[7];
    s[2] = inv[0] ^ inv[1] ^ inv[2] ^ inv[6] ^ inv[7];
    s[3] = inv[0] ^ inv[1] ^ inv[2] ^ inv[3] ^ inv[7];
    s[4] = inv[0] ^ inv[1] ^ inv[2] ^ inv[3] ^ inv[4];
    s[5] = inv[1] ^ inv[2] ^ inv[3] ^ inv[4] ^ inv[5];
    s[6] = inv[2] ^ inv[3] ^ inv[4] ^ inv[5] ^ inv[6];
    s[7] = inv[3] ^ inv[4] ^ inv[5] ^ inv[6] ^ inv[7];
    return s ^ 8'h63;
  endfunction

  // Table built once per call site; callers cache it.
  typedef logic [7:0] tab_t [256];

  function automatic tab_t r_sbox_tab();
    tab_t t;
    for (int i = 0; i < 256; i++) t[i] = r_sbox(8'(i));
    return t;
  endfunction

  function automatic tab_t r_inv_tab(tab_t s);
    tab_t t;
    for (int i = 0; i < 256; i++) t[s[i]] = 8'(i);
    return t;
  endfunction

  typedef logic [31:0] words_t [60];

  function automatic words_t r_expand(logic [255:0] key, int nk, tab_t s);
    words_t w;
    logic [31:0] t;
    logic [7:0] rc = 8'h01;
    int nr = nk + 6;
    for (int i = 0; i < 60; i++) w[i] = 0;
    for (int i = 0; i < nk; i++) w[i] = key[255 - 32*i -: 32];
    for (int i = nk; i < 4*(nr+1); i++) begin
      t = w[i-1];
      if (i % nk == 0) begin
        t = {t[23:0], t[31:24]};
        t = {s[t[31:24]], s[t[23:16]], s[t[15:8]], s[t[7:0]]} ^ {rc, 24'h0};
        rc = r_xt(rc);
      end else if (nk > 6 && i % nk == 4) begin
        t = {s[t[31:24]], s[t[23:16]], s[t[15:8]], s[t[7:0]]};
      end
      w[i] = w[i-nk] ^ t;
    end
    return w;
  endfunction

  typedef logic [7:0] st_t [4][4];   // [row][col]

  function automatic st_t to_st(logic [127:0] b);
    st_t a;
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) a[r][c] = b[127 - 8*(4*c+r) -: 8];
    return a;
  endfunction

  function automatic logic [127:0] from_st(st_t a);
    logic [127:0] b;
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) b[127 - 8*(4*c+r) -: 8] = a[r][c];
    return b;
  endfunction

  function automatic st_t ark(st_t a, words_t w, int rnd);
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++)
      a[r][c] ^= w[4*rnd + c][31 - 8*r -: 8];
    return a;
  endfunction

  function automatic logic [127:0] r_encrypt(logic [127:0] pt, logic [255:0] key, int nk);
    tab_t s = r_sbox_tab();
    words_t w = r_expand(key, nk, s);
    int nr = nk + 6;
    st_t a = to_st(pt), b;
    a = ark(a, w, 0);
    for (int rnd = 1; rnd <= nr; rnd++) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) b[r][c] = s[a[r][(c + r) % 4]];
      a = b;
      if (rnd != nr)
        for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++)
          a[r][c] = r_mul(b[r][c], 2) ^ r_mul(b[(r+1)%4][c], 3) ^ b[(r+2)%4][c] ^ b[(r+3)%4][c];
      a = ark(a, w, rnd);
    end
    return from_st(a);
  endfunction

  function automatic logic [127:0] r_decrypt(logic [127:0] ct, logic [255:0] key, int nk);
    tab_t s = r_sbox_tab();
    tab_t si = r_inv_tab(s);
    words_t w = r_expand(key, nk, s);
    int nr = nk + 6;
    st_t a = to_st(ct), b;
    a = ark(a, w, nr);
    for (int rnd = nr - 1; rnd >= 0; rnd--) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) b[r][(c + r) % 4] = si[a[r][c]];
      a = ark(b, w, rnd);
      if (rnd != 0) begin
        b = a;
        for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++)
          a[r][c] = r_mul(b[r][c], 8'h0e) ^ r_mul(b[(r+1)%4][c], 8'h0b) ^
                    r_mul(b[(r+2)%4][c], 8'h0d) ^ r_mul(b[(r+3)%4][c], 8'h09);
      end
    end
    return from_st(a);
  endfunction

endpackage
