// Serpent block decryptor, one round per clock.
//
// Inverts serpent_eseg with the same 33 subkeys, following the decryption
// flow of the cipher: XOR K32, inverse S7, XOR K31, then for r = 30 down to 0
// the inverse linear transformation, inverse S-box S_(r mod 8) and XOR K_r.
// The first step (K32, S7^-1, K31) is done as the block is taken; the 31
// remaining rounds run on one loop register, like the single sequential
// round of the stream-based encryptor. The description gives decryption only
// as this flow; its hardware form here mirrors the stream-based encryption
// design and is this design's own choice.
//
// Channels as in serpent_eseg: blocks in and out with valid/ready, each
// stream followed by an EOT event, the input EOT taken only when the
// decryptor is empty. Timing: the plaintext appears 32 clocks after the input
// handshake; a new block can be taken every 32 clocks.
module serpent_dseg
  import serpent_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  block_t subkeys [NUM_SUBKEYS],
  input  logic   keys_valid,
  input  logic   in_valid,
  output logic   in_ready,
  input  block_t in_data,
  input  logic   in_eot_valid,
  output logic   in_eot_ready,
  output logic   out_valid,
  input  logic   out_ready,
  output block_t out_data,
  output logic   out_eot_valid,
  input  logic   out_eot_ready,
  output logic   idle
);

  typedef enum logic [1:0] {DQ_IDLE, DQ_RUN, DQ_DONE} dq_state_e;
  dq_state_e  state;
  logic [4:0] r;
  block_t     s;
  logic       ov;
  block_t     od;
  logic       out_free, take;

  // First step: XOR K32, S7^-1, XOR K31.
  block_t first_in, first_sb;
  always_comb
    for (int i = 0; i < 4; i++) first_in[i] = in_data[i] ^ subkeys[32][i];
  serpent_inv_sbox u_first (.sel(3'd7), .x(first_in), .y(first_sb));

  // Inverse round r: LT^-1, S_r^-1, XOR K_r.
  block_t lt_out, sb_out;
  serpent_inv_ltransform u_ilt (.x(s), .y(lt_out));
  serpent_inv_sbox u_isb (.sel(r[2:0]), .x(lt_out), .y(sb_out));

  assign out_free = !ov || out_ready;
  assign take     = keys_valid && ((state == DQ_IDLE) || (state == DQ_DONE && out_free));
  assign in_ready = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= DQ_IDLE;
      r     <= '0;
      s     <= '0;
    end else begin
      unique case (state)
        DQ_RUN: begin
          for (int i = 0; i < 4; i++) s[i] <= sb_out[i] ^ subkeys[6'(r)][i];
          r <= r - 5'd1;
          if (r == 5'd0) state <= DQ_DONE;
        end
        default: begin
          if (take && in_valid) begin
            for (int i = 0; i < 4; i++) s[i] <= first_sb[i] ^ subkeys[31][i];
            r     <= 5'd30;
            state <= DQ_RUN;
          end else if (state == DQ_DONE && out_free) begin
            state <= DQ_IDLE;
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ov <= 1'b0;
      od <= '0;
    end else if (out_free) begin
      ov <= (state == DQ_DONE);
      if (state == DQ_DONE) od <= s;
    end
  end
  assign out_valid = ov;
  assign out_data  = od;

  typedef enum logic {EOT_IDLE, EOT_SEND} eot_state_e;
  eot_state_e eot_state;

  assign idle          = (state == DQ_IDLE) && !ov;
  assign in_eot_ready  = idle && (eot_state == EOT_IDLE) && !in_valid;
  assign out_eot_valid = (eot_state == EOT_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eot_state <= EOT_IDLE;
    else if (eot_state == EOT_IDLE && in_eot_valid && in_eot_ready) eot_state <= EOT_SEND;
    else if (eot_state == EOT_SEND && out_eot_ready) eot_state <= EOT_IDLE;
  end

  property p_hold_out;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold_out: assert property (p_hold_out);

endmodule
