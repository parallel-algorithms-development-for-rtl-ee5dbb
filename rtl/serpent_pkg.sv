// Shared types and constants for the Serpent encryption core.
//
// A 128-bit data block (and a round subkey) is held as four 32-bit words
// x0..x3, x0 in bits [31:0]. All rounds work on the block in bit-sliced form:
// bit j of x0, x1, x2 and x3 form one 4-bit S-box input, x0 being its least
// significant bit. This is the form in which the cipher is specified here, so
// no initial or final bit permutation is applied anywhere.
//
// The eight 4-bit S-box tables are those of the Serpent cipher definition.
// The description this core follows writes out only S0 (as a Boolean network,
// see serpent_sbox); S1..S7 are taken from the cipher's own definition.
package serpent_pkg;

  typedef logic [31:0] word_t;
  typedef word_t [3:0] block_t;       // [0] = x0 ... [3] = x3
  typedef logic  [2:0] sbox_sel_t;    // S-box number 0..7

  localparam int unsigned NUM_SUBKEYS = 33;   // K0..K32, 132 words
  localparam int unsigned WS_DEPTH    = 140;  // 8 key words + 132 prekeys
  localparam word_t       PHI         = 32'h9e3779b9;

  // Key lengths the cipher accepts; shorter keys are padded to 256 bits.
  typedef enum logic [1:0] {
    KEY_128 = 2'd0,
    KEY_192 = 2'd1,
    KEY_256 = 2'd2
  } key_len_e;

  // S-box tables, entry v in bits [4v+3:4v].
  localparam logic [63:0] SBOX_TABLE [8] = '{
    64'hc90724deb56a1f83,   // S0: 3 8 f 1 a 6 5 b e d 4 2 7 0 9 c
    64'h43d68eb1a50972cf,   // S1: f c 2 7 9 0 5 a 1 b e 8 6 d 3 4
    64'h25b04e1dfac39768,   // S2: 8 6 7 9 3 c a f d 1 e 4 0 b 5 2
    64'he57a421d369c8bf0,   // S3: 0 f b 8 c 9 6 3 d 1 2 4 a 7 5 e
    64'hd7e9a4526b0c38f1,   // S4: 1 f 8 3 c 0 b 6 2 5 4 a 9 e 7 d
    64'h176d8e30c9a4b25f,   // S5: f 5 2 b 4 a 9 c 0 3 e 8 d 6 7 1
    64'h0a3df19eb6485c27,   // S6: 7 2 c 5 8 4 6 b e 9 1 f d 3 a 0
    64'h6539ac47b28e0fd1    // S7: 1 d f 0 e 8 2 b 7 4 c a 9 3 5 6
  };

  // S-box number used for key-schedule group g (subkey K_g): S3, S2, S1, S0,
  // S7, S6, S5, S4, then repeating, i.e. (3 - g) mod 8.
  function automatic sbox_sel_t keysched_sbox(input int unsigned g);
    return sbox_sel_t'((11 - (g % 8)) % 8);
  endfunction

  function automatic word_t rotl(input word_t v, input int unsigned n);
    return (v << n) | (v >> (32 - n));
  endfunction

endpackage
