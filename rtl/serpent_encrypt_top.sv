// Serpent encryption engine: SERPENTENCRYPT(key) = KEYSCHEDULE(key) >>
// SMAP(VMAP_n(SMAP(SERPENTESEG))), with a decryption path beside it.
//
// A key is loaded once; the key schedule (stream-output design) streams the
// 33 subkeys into the subkey store; then any number of plaintext blocks are
// encrypted by the partially pipelined encryptor (N_PAR pipelined rounds,
// 31-N_PAR rounds in one iterated round, default 2 and 29). The plaintext and
// ciphertext are streams: blocks on a valid/ready channel, and an EOT event
// on a separate channel that is passed on after the last ciphertext block.
// The decryptor (one inverse round per clock) reads the same subkeys and has
// its own pair of streams (dct_* in, dpt_* out); it runs independently of and
// concurrently with the encryptor. N_WAYS (the n of the multi-way form,
// default 1, no value given in the description) sets how many blocks each
// plaintext and ciphertext transfer carries, one encryptor per block. The
// description covers decryption only as
// an algorithm; giving it its own data path here is this design's choice.
//
// A new key is taken only while encryptor and decryptor are empty; from then until the
// new subkeys are in place (about 137 clocks) plaintext input is stalled.
// keys_valid reports that a key schedule has completed. The host board link
// of the original platform is not part of this design: its signals are these
// ports.
module serpent_encrypt_top
  import serpent_pkg::*;
#(
  parameter int unsigned N_WAYS = 1,
  parameter int unsigned N_PAR  = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // key
  input  logic         key_valid,
  output logic         key_ready,
  input  logic [255:0] key,
  input  key_len_e     key_len,
  output logic         keys_valid,
  // plaintext stream
  input  logic         pt_valid,
  output logic         pt_ready,
  input  block_t [N_WAYS-1:0] pt_data,
  input  logic         pt_eot_valid,
  output logic         pt_eot_ready,
  // ciphertext stream
  output logic         ct_valid,
  input  logic         ct_ready,
  output block_t [N_WAYS-1:0] ct_data,
  output logic         ct_eot_valid,
  input  logic         ct_eot_ready,
  // decryption: ciphertext stream in, plaintext stream out
  input  logic         dct_valid,
  output logic         dct_ready,
  input  block_t       dct_data,
  input  logic         dct_eot_valid,
  output logic         dct_eot_ready,
  output logic         dpt_valid,
  input  logic         dpt_ready,
  output block_t       dpt_data,
  output logic         dpt_eot_valid,
  input  logic         dpt_eot_ready
);

  logic         ks_key_ready, enc_idle, dec_idle, all_idle;
  logic         ks_valid, ks_ready, eot_valid, eot_ready;
  block_t [7:0] ks_keys;
  block_t       last_key;
  block_t       subkeys [NUM_SUBKEYS];
  logic         store_keys_valid;
  logic         key_take;

  assign all_idle  = enc_idle && dec_idle;
  assign key_ready = ks_key_ready && all_idle;
  assign key_take  = key_valid && key_ready;

  serpent_keyschedule u_ks (
    .clk, .rst_n,
    .key_valid (key_valid && all_idle),
    .key_ready (ks_key_ready),
    .key, .key_len,
    .ks_valid, .ks_ready, .ks_keys,
    .eot_valid, .eot_ready,
    .last_valid(), .last_key
  );

  serpent_subkey_store u_store (
    .clk, .rst_n,
    .clear     (key_take),
    .ks_valid, .ks_ready, .ks_keys,
    .eot_valid, .eot_ready,
    .last_key,
    .keys_valid(store_keys_valid),
    .subkeys
  );

  // The store is written one beat at a time; the encryptor may only start
  // once the whole set is in and no new key is being loaded.
  assign keys_valid = store_keys_valid;

  serpent_eseg_multi #(.N_WAYS(N_WAYS), .N_PAR(N_PAR)) u_enc (
    .clk, .rst_n,
    .subkeys,
    .keys_valid   (store_keys_valid && !key_valid),
    .in_valid     (pt_valid),
    .in_ready     (pt_ready),
    .in_data      (pt_data),
    .in_eot_valid (pt_eot_valid),
    .in_eot_ready (pt_eot_ready),
    .out_valid    (ct_valid),
    .out_ready    (ct_ready),
    .out_data     (ct_data),
    .out_eot_valid(ct_eot_valid),
    .out_eot_ready(ct_eot_ready),
    .idle         (enc_idle)
  );

  serpent_dseg u_dec (
    .clk, .rst_n,
    .subkeys,
    .keys_valid   (store_keys_valid && !key_valid),
    .in_valid     (dct_valid),
    .in_ready     (dct_ready),
    .in_data      (dct_data),
    .in_eot_valid (dct_eot_valid),
    .in_eot_ready (dct_eot_ready),
    .out_valid    (dpt_valid),
    .out_ready    (dpt_ready),
    .out_data     (dpt_data),
    .out_eot_valid(dpt_eot_valid),
    .out_eot_ready(dpt_eot_ready),
    .idle         (dec_idle)
  );

endmodule
