// Reference model of the Serpent cipher for the testbenches.
//
// Written directly from the cipher definition, independently of the RTL:
// S-boxes as integer permutation tables applied bit slice by bit slice, the
// linear transformation, the key schedule and block encryption. Blocks are
// four 32-bit words, word 0 in bits [31:0].
package serpent_ref_pkg;

  typedef logic [3:0][31:0] rblk_t;
  typedef rblk_t rkeys_t [33];

  localparam int REF_S [8][16] = '{
    '{ 3, 8,15, 1,10, 6, 5,11,14,13, 4, 2, 7, 0, 9,12},
    '{15,12, 2, 7, 9, 0, 5,10, 1,11,14, 8, 6,13, 3, 4},
    '{ 8, 6, 7, 9, 3,12,10,15,13, 1,14, 4, 0,11, 5, 2},
    '{ 0,15,11, 8,12, 9, 6, 3,13, 1, 2, 4,10, 7, 5,14},
    '{ 1,15, 8, 3,12, 0,11, 6, 2, 5, 4,10, 9,14, 7,13},
    '{15, 5, 2,11, 4,10, 9,12, 0, 3,14, 8,13, 6, 7, 1},
    '{ 7, 2,12, 5, 8, 4, 6,11,14, 9, 1,15,13, 3,10, 0},
    '{ 1,13,15, 0,14, 8, 2,11, 7, 4,12,10, 9, 3, 5, 6}
  };

  function automatic logic [31:0] ref_rol(logic [31:0] v, int n);
    return (v << n) | (v >> (32 - n));
  endfunction

  function automatic rblk_t ref_sbox(int i, rblk_t x);
    rblk_t y = '0;
    for (int j = 0; j < 32; j++) begin
      int n = 0, r;
      for (int k = 0; k < 4; k++) n += int'(x[k][j]) << k;
      r = REF_S[i][n];
      for (int k = 0; k < 4; k++) y[k][j] = r[k];
    end
    return y;
  endfunction

  function automatic rblk_t ref_lt(rblk_t x);
    logic [31:0] a = x[0], b = x[1], c = x[2], d = x[3];
    a = ref_rol(a, 13);  c = ref_rol(c, 3);
    b = b ^ a ^ c;       d = d ^ c ^ (a << 3);
    b = ref_rol(b, 1);   d = ref_rol(d, 7);
    a = a ^ b ^ d;       c = c ^ d ^ (b << 7);
    a = ref_rol(a, 5);   c = ref_rol(c, 22);
    return {d, c, b, a};
  endfunction

  function automatic rblk_t ref_xor(rblk_t a, rblk_t b);
    return a ^ b;
  endfunction

  // Prekeys w[0..139] of a 256-bit (already padded) key.
  typedef logic [31:0] rws_t [140];
  function automatic rws_t ref_prekeys(logic [255:0] k);
    rws_t w;
    for (int i = 0; i < 8; i++) w[i] = k[32*i +: 32];
    for (int i = 8; i < 140; i++)
      w[i] = ref_rol(w[i-8] ^ w[i-5] ^ w[i-3] ^ w[i-1] ^ 32'h9e3779b9 ^ (i - 8), 11);
    return w;
  endfunction

  function automatic logic [255:0] ref_pad(logic [255:0] k, int bits);
    logic [255:0] p = k;
    if (bits < 256) begin
      for (int i = bits; i < 256; i++) p[i] = 1'b0;
      p[bits] = 1'b1;
    end
    return p;
  endfunction

  function automatic rkeys_t ref_subkeys(logic [255:0] k, int bits);
    rws_t   w = ref_prekeys(ref_pad(k, bits));
    rkeys_t ks;
    for (int g = 0; g < 33; g++)
      ks[g] = ref_sbox((3 - g + 64) % 8, {w[8+4*g+3], w[8+4*g+2], w[8+4*g+1], w[8+4*g]});
    return ks;
  endfunction

  function automatic rblk_t ref_encrypt(rkeys_t ks, rblk_t p);
    rblk_t x = p;
    for (int r = 0; r < 31; r++) x = ref_lt(ref_sbox(r % 8, ref_xor(x, ks[r])));
    x = ref_sbox(7, ref_xor(x, ks[31]));
    return ref_xor(x, ks[32]);
  endfunction

  function automatic rblk_t rand_blk();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
