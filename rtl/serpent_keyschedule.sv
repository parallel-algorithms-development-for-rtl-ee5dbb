// Serpent key schedule, stream-output design (KEYSCHEDULE, second design).
//
// Produces the 33 round subkeys K0..K32 (132 words) from a user key.
//   1. Padding and SEGS: a 128- or 192-bit key is extended to 256 bits by a
//      single 1 bit just above its most significant bit, then zeros (the
//      Serpent rule; the description only says "padding ... if necessary").
//      The 256 bits are cut into eight words, ws[0] = key[31:0].
//   2. GENERATEWS (serpent_generate_ws) computes the 132 prekeys.
//   3. SMAP(VMAPWITH[S3,S2,S1,S0,S7,S6,S5,S4]): each of the four prekey
//      beats (32 words) passes through one bank of eight S-boxes, giving
//      eight subkeys per beat; beat b carries K(8b)..K(8b+7). The S-box bank
//      is shared by the four beats, which is what distinguishes this design
//      from the first one (32 S-boxes side by side).
//   4. A separate S3 in parallel turns ws[136..139] into K32.
//
// Interface: key channel (valid/ready, key and key_len); subkey stream
// (ks_valid/ks_ready, 8 subkeys per beat, 4 beats) followed by an EOT event
// (eot_valid/eot_ready); K32 on last_key, valid while last_valid.
// Timing: 132 clocks after the key is taken the first beat is offered; the
// S-box banks are combinational between the prekey stream and the output.
module serpent_keyschedule
  import serpent_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          key_valid,
  output logic          key_ready,
  input  logic [255:0]  key,
  input  key_len_e      key_len,
  output logic          ks_valid,
  input  logic          ks_ready,
  output block_t [7:0]  ks_keys,
  output logic          eot_valid,
  input  logic          eot_ready,
  output logic          last_valid,
  output block_t        last_key
);

  // Padding and segmentation.
  logic [255:0] padded;
  word_t [7:0]  segs;
  always_comb begin
    padded = key;
    unique case (key_len)
      KEY_128: padded = {127'b0, 1'b1, key[127:0]};
      KEY_192: padded = {63'b0,  1'b1, key[191:0]};
      default: padded = key;
    endcase
    for (int j = 0; j < 8; j++) segs[j] = padded[32*j +: 32];
  end

  word_t [31:0] ws_beat;
  block_t       ws_last;

  serpent_generate_ws u_gen (
    .clk, .rst_n,
    .in_valid  (key_valid),
    .in_ready  (key_ready),
    .in_words  (segs),
    .out_valid (ks_valid),
    .out_ready (ks_ready),
    .out_words (ws_beat),
    .eot_valid (eot_valid),
    .eot_ready (eot_ready),
    .last_valid(last_valid),
    .last_words(ws_last)
  );

  // VMAPWITH bank: group g of each beat goes through S-box (3 - g) mod 8.
  for (genvar g = 0; g < 8; g++) begin : g_bank
    block_t grp;
    assign grp = {ws_beat[4*g+3], ws_beat[4*g+2], ws_beat[4*g+1], ws_beat[4*g]};
    serpent_sbox u_sb (.sel(keysched_sbox(g)), .x(grp), .y(ks_keys[g]));
  end

  // The parallel S3 for the last four prekeys.
  serpent_sbox u_last (.sel(3'd3), .x(ws_last), .y(last_key));

endmodule
