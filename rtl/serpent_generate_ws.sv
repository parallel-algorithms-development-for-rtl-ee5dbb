// Prekey generator (GENERATEWS).
//
// Takes the eight 32-bit words of the padded 256-bit key as one vector and
// expands them into the 132 prekeys of the Serpent key schedule,
//   ws[i] = (ws[i-8] ^ ws[i-5] ^ ws[i-3] ^ ws[i-1] ^ PHI ^ (i-8)) <<< 11,
// for i = 8..139, PHI = 0x9e3779b9. As in the description, all 140 words live
// in one register array ws[140] and the loop computes one prekey per clock
// (132 clocks). The result then leaves as a stream of vectors: four beats of
// 32 prekeys each (ws[8..39], ws[40..71], ...), i.e. four groups of eight
// 4-word sub-vectors, followed by an end-of-transmission (EOT) event on a
// separate channel. The four remaining prekeys ws[136..139] are offered on
// their own vector output, valid from the end of the loop until the next key.
//
// Channels use a valid/ready rendezvous: a value moves on the clock edge
// where both are high. Timing: the key is taken on its handshake, 132 clocks
// of generation follow, then the four beats and the EOT as fast as the
// receiver accepts them. Reset is asynchronous and active low.
module serpent_generate_ws
  import serpent_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // key words ws[0..7]
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t [7:0] in_words,
  // stream of prekey vectors, 32 words per beat
  output logic         out_valid,
  input  logic         out_ready,
  output word_t [31:0] out_words,
  output logic         eot_valid,
  input  logic         eot_ready,
  // last four prekeys ws[136..139]
  output logic        last_valid,
  output block_t      last_words
);

  typedef enum logic [1:0] {GW_IDLE, GW_GEN, GW_OUT, GW_EOT} gw_state_e;

  gw_state_e  state;
  word_t      ws [WS_DEPTH];
  logic [7:0] idx;     // prekey index i while generating
  logic [1:0] beat;    // output beat 0..3

  word_t wnext;
  always_comb
    wnext = rotl(ws[idx - 8'd8] ^ ws[idx - 8'd5] ^ ws[idx - 8'd3] ^ ws[idx - 8'd1]
                 ^ PHI ^ (word_t'(idx) - 32'd8), 11);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= GW_IDLE;
      idx        <= 8'd8;
      beat       <= '0;
      last_valid <= 1'b0;
      for (int i = 0; i < WS_DEPTH; i++) ws[i] <= '0;
    end else begin
      unique case (state)
        GW_IDLE: if (in_valid) begin
          for (int j = 0; j < 8; j++) ws[j] <= in_words[j];
          idx        <= 8'd8;
          last_valid <= 1'b0;
          state      <= GW_GEN;
        end
        GW_GEN: begin
          ws[idx] <= wnext;
          idx     <= idx + 8'd1;
          if (idx == 8'(WS_DEPTH - 1)) begin
            state      <= GW_OUT;
            beat       <= '0;
            last_valid <= 1'b1;
          end
        end
        GW_OUT: if (out_ready) begin
          beat <= beat + 2'd1;
          if (beat == 2'd3) state <= GW_EOT;
        end
        GW_EOT: if (eot_ready) state <= GW_IDLE;
        default: state <= GW_IDLE;
      endcase
    end
  end

  assign in_ready  = (state == GW_IDLE);
  assign out_valid = (state == GW_OUT);
  assign eot_valid = (state == GW_EOT);

  always_comb begin
    for (int j = 0; j < 32; j++) out_words[j] = ws[8 + 32 * int'(beat) + j];
    for (int j = 0; j < 4; j++)  last_words[j] = ws[136 + j];
  end

endmodule
