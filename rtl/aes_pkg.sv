// aes_pkg -- types, constants and GF(2^8) arithmetic shared by the AES blocks.
//
// The key length selects one of three cipher variants (AES-128/192/256). In the
// reconfigurable system each variant is a separate partial module; in this RTL the
// variant is a mode of one core, named by key_len_e. Nk (key words) and Nr (rounds)
// follow the standard key/block/round table: 4/10, 6/12, 8/14.
//
// Byte order: a 128-bit block is written as in the AES standard, first byte in the
// most significant bits. State byte k (k = 4*column + row) sits at bits
// [127-8k -: 8]. A key is left-aligned in a 256-bit vector, so a 128-bit key
// occupies bits [255:128].
//
// The S-box is computed, not tabulated: multiplicative inverse in GF(2^8) modulo
// x^8+x^4+x^3+x+1 (with 0 mapped to 0), then the affine transform
// b'_i = b_i ^ b_(i+4) ^ b_(i+5) ^ b_(i+6) ^ b_(i+7) ^ c_i, c = 8'h63.
// The inverse affine transform (constant 8'h05) is the standard one.
package aes_pkg;

  typedef enum logic [1:0] {
    KEY_128 = 2'd0,
    KEY_192 = 2'd1,
    KEY_256 = 2'd2
  } key_len_e;

  // Cycles spent on one round by the byte-serial core: 16 S-box steps, 4 column
  // steps, 4 round-key steps and one write-back step.
  localparam int unsigned ROUND_CYCLES = 25;
  localparam int unsigned MAX_NR       = 14;
  localparam int unsigned MAX_NK       = 8;
  localparam int unsigned RK_ROWS      = MAX_NR + 1;   // round keys 0..Nr

  function automatic logic [3:0] nr_of(key_len_e kl);
    case (kl)
      KEY_192: return 4'd12;
      KEY_256: return 4'd14;
      default: return 4'd10;
    endcase
  endfunction

  function automatic logic [3:0] nk_of(key_len_e kl);
    case (kl)
      KEY_192: return 4'd6;
      KEY_256: return 4'd8;
      default: return 4'd4;
    endcase
  endfunction

  // Multiply by x modulo the AES polynomial.
  function automatic logic [7:0] xtime(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    logic [7:0] aa;
    p  = 8'h00;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  // a^254 = a^-1 for a != 0, and 0 for a = 0.
  function automatic logic [7:0] gf_inv(logic [7:0] a);
    logic [7:0] a2, a4, a8, a16, a32, a64, a128, r;
    a2   = gf_mul(a, a);
    a4   = gf_mul(a2, a2);
    a8   = gf_mul(a4, a4);
    a16  = gf_mul(a8, a8);
    a32  = gf_mul(a16, a16);
    a64  = gf_mul(a32, a32);
    a128 = gf_mul(a64, a64);
    r = gf_mul(a128, a64);
    r = gf_mul(r, a32);
    r = gf_mul(r, a16);
    r = gf_mul(r, a8);
    r = gf_mul(r, a4);
    r = gf_mul(r, a2);
    return r;
  endfunction

  function automatic logic [7:0] affine(logic [7:0] b);
    logic [7:0] o;
    for (int i = 0; i < 8; i++)
      o[i] = b[i] ^ b[(i + 4) % 8] ^ b[(i + 5) % 8] ^ b[(i + 6) % 8] ^ b[(i + 7) % 8];
    return o ^ 8'h63;
  endfunction

  function automatic logic [7:0] inv_affine(logic [7:0] b);
    logic [7:0] o;
    for (int i = 0; i < 8; i++)
      o[i] = b[(i + 2) % 8] ^ b[(i + 5) % 8] ^ b[(i + 7) % 8];
    return o ^ 8'h05;
  endfunction

  function automatic logic [7:0] sbox_fn(logic [7:0] a);
    return affine(gf_inv(a));
  endfunction

  function automatic logic [7:0] inv_sbox_fn(logic [7:0] a);
    return gf_inv(inv_affine(a));
  endfunction

endpackage
