// aes_mixcolumn -- MixColumns (or InvMixColumns) on one 32-bit state column.
//
// The column s0..s3 (s0 in the most significant byte) is multiplied, as a
// polynomial over GF(2^8) modulo x^4+1, by a(x) = {03}x^3 + {01}x^2 + {01}x + {02},
// i.e. by the circulant matrix with first row 02 03 01 01. With inv = 1 the inverse
// matrix (first row 0e 0b 0d 09, standard AES, not given in the paper) is used.
//
// Combinational, no latency. The byte-serial AES core uses one instance and walks
// it over the four columns in four cycles.
module aes_mixcolumn
  import aes_pkg::*;
(
  input  logic [31:0] col_in,
  input  logic        inv,
  output logic [31:0] col_out
);

  logic [7:0] s [4];
  logic [7:0] r [4];

  always_comb begin
    for (int i = 0; i < 4; i++) s[i] = col_in[31 - 8*i -: 8];
    for (int i = 0; i < 4; i++) begin
      if (inv)
        r[i] = gf_mul(s[i], 8'h0e) ^ gf_mul(s[(i+1)%4], 8'h0b) ^
               gf_mul(s[(i+2)%4], 8'h0d) ^ gf_mul(s[(i+3)%4], 8'h09);
      else
        r[i] = xtime(s[i]) ^ (xtime(s[(i+1)%4]) ^ s[(i+1)%4]) ^
               s[(i+2)%4] ^ s[(i+3)%4];
    end
    for (int i = 0; i < 4; i++) col_out[31 - 8*i -: 8] = r[i];
  end

endmodule
