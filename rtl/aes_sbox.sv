// aes_sbox -- SubBytes substitution of one byte, forward or inverse.
//
// Forward: the byte is replaced by its multiplicative inverse in GF(2^8) (zero maps
// to zero), then passed through the affine transform with constant 8'h63, exactly
// as the SubBytes definition builds the table. Inverse (inv = 1): the inverse
// affine transform first, then the inverse in GF(2^8). The inverse direction is not
// spelled out in the paper, which details encryption only; it is the standard one.
//
// Purely combinational: dout follows din and inv in the same cycle. The inversion is
// computed as a^254 with a chain of GF multipliers rather than read from a ROM; on an
// FPGA the synthesis tool may fold it into LUTs or a block RAM, the function is the
// same.
module aes_sbox
  import aes_pkg::*;
(
  input  logic [7:0] din,
  input  logic       inv,
  output logic [7:0] dout
);

  always_comb begin
    if (inv) dout = gf_inv(inv_affine(din));
    else     dout = affine(gf_inv(din));
  end

endmodule
