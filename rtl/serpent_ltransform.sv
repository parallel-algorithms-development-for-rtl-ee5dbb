// Serpent linear transformation (LTRANSFORM).
//
// Mixes the four words of a block after the S-box layer of rounds 0..30:
//   x0 <<<= 13; x2 <<<= 3; x1 ^= x0 ^ x2; x3 ^= x2 ^ (x0 << 3);
//   x1 <<<= 1;  x3 <<<= 7; x0 ^= x1 ^ x3; x2 ^= x3 ^ (x1 << 7);
//   x0 <<<= 5;  x2 <<<= 22
// (<<< rotates left, << shifts left filling zeros). This is the word-level
// network of the description's lTransform, with its intermediate names
// (y0i, y2i, y1i, y3i, y0ii, y2ii). Combinational.
module serpent_ltransform
  import serpent_pkg::*;
(
  input  block_t x,
  output block_t y
);

  word_t y0i, y2i, y1i, y3i, y0ii, y2ii, y1, y3;

  always_comb begin
    y0i  = rotl(x[0], 13);
    y2i  = rotl(x[2], 3);
    y1i  = x[1] ^ y0i ^ y2i;
    y3i  = y2i ^ (y0i << 3) ^ x[3];
    y1   = rotl(y1i, 1);
    y3   = rotl(y3i, 7);
    y0ii = y0i ^ y1 ^ y3;
    y2ii = y2i ^ y3 ^ (y1 << 7);
    y[0] = rotl(y0ii, 5);
    y[1] = y1;
    y[2] = rotl(y2ii, 22);
    y[3] = y3;
  end

endmodule
