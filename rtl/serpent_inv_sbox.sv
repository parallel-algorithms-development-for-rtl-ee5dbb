// Bit-sliced inverse Serpent S-box, for decryption.
//
// Applies S_sel^-1 to the 32 four-bit slices of a block, slice j being
// {x3[j], x2[j], x1[j], x0[j]}. The inverse tables are not stored: for each
// slice the forward table of serpent_pkg is searched for the entry equal to
// the slice value, and that entry's index is the result (sixteen parallel
// 4-bit compares per slice). Combinational.
module serpent_inv_sbox
  import serpent_pkg::*;
(
  input  sbox_sel_t sel,
  input  block_t    x,
  output block_t    y
);

  always_comb begin
    logic [63:0] tab;
    logic [3:0]  nib, res;
    tab = SBOX_TABLE[sel];
    y = '0;
    for (int j = 0; j < 32; j++) begin
      nib = {x[3][j], x[2][j], x[1][j], x[0][j]};
      res = '0;
      for (int v = 0; v < 16; v++)
        if (tab[4*v +: 4] == nib) res = 4'(v);
      for (int k = 0; k < 4; k++) y[k][j] = res[k];
    end
  end

endmodule
