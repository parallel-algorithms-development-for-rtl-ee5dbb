// Round-subkey store.
//
// The encryptor needs every subkey for every block: the pipelined rounds take
// theirs as fixed vectors, the sequential round reads one per clock, and the
// output stage uses the last two. This register file receives the subkey
// stream of the key schedule (four beats of eight subkeys, then EOT, plus K32
// on its own port) and keeps all 33 subkeys available in parallel. The
// description has the key schedule hand its output to the encryptor but does
// not say how it is held; a register array is this design's choice.
//
// Writes: beat b of the stream fills K(8b)..K(8b+7); the EOT event writes K32
// and sets keys_valid. A new key (clear) drops keys_valid until the next EOT.
// The store is always ready to accept.
module serpent_subkey_store
  import serpent_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         ks_valid,
  output logic         ks_ready,
  input  block_t [7:0] ks_keys,
  input  logic         eot_valid,
  output logic         eot_ready,
  input  block_t       last_key,
  output logic         keys_valid,
  output block_t       subkeys [NUM_SUBKEYS]
);

  logic [1:0] beat;

  assign ks_ready  = 1'b1;
  assign eot_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat       <= '0;
      keys_valid <= 1'b0;
      for (int i = 0; i < NUM_SUBKEYS; i++) subkeys[i] <= '0;
    end else if (clear) begin
      beat       <= '0;
      keys_valid <= 1'b0;
    end else begin
      if (ks_valid) begin
        for (int g = 0; g < 8; g++) subkeys[8 * int'(beat) + g] <= ks_keys[g];
        beat <= beat + 2'd1;
      end
      if (eot_valid) begin
        subkeys[NUM_SUBKEYS - 1] <= last_key;
        keys_valid <= 1'b1;
        beat       <= '0;
      end
    end
  end

endmodule
