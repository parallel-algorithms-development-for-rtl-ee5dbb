// Bit-sliced Serpent S-box.
//
// Applies S-box S_sel to the 32 four-bit slices of a block at once: slice j is
// {x3[j], x2[j], x1[j], x0[j]} (x0 the least significant bit), and its 4-bit
// result is returned in the same bit j of y0..y3. Purely combinational; one
// instance serves whichever of S0..S7 the select input names, as the round
// function needs when one hardware round runs all 32 rounds in turn.
//
// S0 is built as the Boolean network the cipher description gives for it
// (temporaries t01..t17 over XOR, OR, AND and a final complement, inputs
// a,b,c,d = x0..x3, outputs w,x,y,z = y0..y3). S1..S7 are looked up per slice
// in the tables of serpent_pkg, which come from the Serpent definition, since
// the description states only that they are "specified in a similar way".
module serpent_sbox
  import serpent_pkg::*;
(
  input  sbox_sel_t sel,
  input  block_t    x,
  output block_t    y
);

  // S0 as a Boolean network.
  block_t s0_out;
  always_comb begin
    word_t a, b, c, d;
    word_t t01, t02, t03, t05, t06, t07, t08, t09, t11, t12, t13, t14, t15, t17;
    word_t w, xo, yo, z;
    a = x[0]; b = x[1]; c = x[2]; d = x[3];
    t01 = b ^ c;
    t02 = a | d;
    t03 = a ^ b;
    z   = t02 ^ t01;
    t05 = c | z;
    t06 = a ^ d;
    t07 = b | c;
    t08 = d & t05;
    t09 = t03 & t07;
    yo  = t09 ^ t08;
    t11 = t09 & yo;
    t12 = c ^ d;
    t13 = t07 ^ t11;
    t14 = b & t06;
    t15 = t06 ^ t13;
    w   = ~t15;
    t17 = w ^ t14;
    xo  = t12 ^ t17;
    s0_out = '{z, yo, xo, w};   // [3]=z ... [0]=w
  end

  // S1..S7 by table, slice by slice.
  block_t tab_out;
  always_comb begin
    logic [63:0] tab;
    logic [3:0]  nib, res;
    tab = SBOX_TABLE[sel];
    tab_out = '0;
    for (int j = 0; j < 32; j++) begin
      nib = {x[3][j], x[2][j], x[1][j], x[0][j]};
      res = tab[4*nib +: 4];
      for (int k = 0; k < 4; k++) tab_out[k][j] = res[k];
    end
  end

  assign y = (sel == 3'd0) ? s0_out : tab_out;

endmodule
