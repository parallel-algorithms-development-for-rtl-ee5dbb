// Inverse Serpent linear transformation, for decryption.
//
// Undoes serpent_ltransform step by step in reverse order (>>> rotates right):
//   x2 >>>= 22; x0 >>>= 5; x2 ^= x3 ^ (x1 << 7); x0 ^= x1 ^ x3;
//   x3 >>>= 7;  x1 >>>= 1; x3 ^= x2 ^ (x0 << 3); x1 ^= x0 ^ x2;
//   x2 >>>= 3;  x0 >>>= 13
// Combinational.
module serpent_inv_ltransform
  import serpent_pkg::*;
(
  input  block_t x,
  output block_t y
);

  always_comb begin
    word_t a, b, c, d;
    a = x[0]; b = x[1]; c = x[2]; d = x[3];
    c = rotl(c, 32 - 22);
    a = rotl(a, 32 - 5);
    c = c ^ d ^ (b << 7);
    a = a ^ b ^ d;
    d = rotl(d, 32 - 7);
    b = rotl(b, 32 - 1);
    d = d ^ c ^ (a << 3);
    b = b ^ a ^ c;
    c = rotl(c, 32 - 3);
    a = rotl(a, 32 - 13);
    y = {d, c, b, a};
  end

endmodule
