// One Serpent round for rounds 0..30 (SERPENTFOLD).
//
// y = LT( S_sel( x XOR k ) ): the block is XORed word by word with the round
// subkey (VZIPWITH(EXOR)), passed through the S-box whose number the round
// supplies, and linearly transformed. Combinational; the callers decide where
// registers go (one per pipelined round, or one loop register for the
// sequential round).
module serpent_fold
  import serpent_pkg::*;
(
  input  block_t    x,
  input  block_t    k,
  input  sbox_sel_t sel,
  output block_t    y
);

  block_t mixed, subst;

  always_comb
    for (int i = 0; i < 4; i++) mixed[i] = x[i] ^ k[i];

  serpent_sbox u_sbox (.sel(sel), .x(mixed), .y(subst));
  serpent_ltransform u_lt (.x(subst), .y(y));

endmodule
