// Serpent block encryptor, partially pipelined (SERPENTESEG, third design).
//
// Encrypts 128-bit blocks with the 33 subkeys held in serpent_subkey_store:
//   rounds 0..N_PAR-1  : N_PAR copies of SERPENTFOLD in a pipeline (VVFOLDL),
//                        each followed by a register, each with fixed subkey
//                        K_r and S-box r mod 8;
//   rounds N_PAR..30   : one SERPENTFOLD iterated over a loop register
//                        (SVFOLDL), one round per clock, reading K_r and
//                        S-box r mod 8 as the round counter r advances;
//   round 31           : XOR K31, S7, XOR K32 (two VZIPWITH(EXOR) and an S7),
//                        into the output register.
// N_PAR = 2 is the configuration the description reports as its most parallel
// fitting one (2 pipelined, 29 sequential rounds). N_PAR = 0 gives its second
// (stream-based, single round) design and N_PAR = 31 its first (fully
// pipelined) design, which has no sequential part.
//
// Channels: plaintext in (in_valid/in_ready/in_data) and ciphertext out
// (out_valid/out_ready/out_data), each with an EOT event channel. Stage
// registers hand data forward with valid/ready, so a stalled output holds the
// pipeline. The input EOT is accepted only once every stage is empty, and the
// output EOT follows it, so the EOT never overtakes a block. No block is taken
// while keys_valid is low.
// Timing: with the output ready, a block appears 31 clocks after its input
// handshake, and a new block can enter every 31-N_PAR clocks (every clock
// when N_PAR = 31).
module serpent_eseg
  import serpent_pkg::*;
#(
  parameter int unsigned N_PAR = 2
) (
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

  localparam int unsigned N_SEQ = 31 - N_PAR;   // rounds done by the loop

  initial assert (N_PAR <= 31) else $fatal(1, "N_PAR must be 0..31");

  // ---------------------------------------------------------------- input
  logic   src_valid;   // block offered to the next stage
  logic   src_ready;
  block_t src_data;

  assign src_valid = in_valid && keys_valid;
  assign in_ready  = src_ready && keys_valid;
  assign src_data  = in_data;

  // ------------------------------------------------------ pipelined rounds
  logic   pv [N_PAR + 1];    // pv[p], pd[p]: data entering stage p
  logic   pr [N_PAR + 1];
  block_t pd [N_PAR + 1];

  assign pv[0]     = src_valid;
  assign pd[0]     = src_data;
  assign src_ready = pr[0];

  for (genvar p = 0; p < N_PAR; p++) begin : g_pipe
    block_t fold_out;
    logic   v;
    block_t d;
    serpent_fold u_fold (.x(pd[p]), .k(subkeys[p]), .sel(sbox_sel_t'(p % 8)),
                         .y(fold_out));
    assign pr[p] = !v || pr[p + 1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v <= 1'b0;
        d <= '0;
      end else if (pr[p]) begin
        v <= pv[p];
        if (pv[p]) d <= fold_out;
      end
    end
    assign pv[p + 1] = v;
    assign pd[p + 1] = d;
  end

  // ------------------------------------------------------- output register
  logic   fin_valid;     // block after round 30, offered to round 31
  logic   fin_ready;
  block_t fin_data;
  block_t last_out;   // block XOR K31, the S7 input
  block_t s7_out;
  logic   ov;
  block_t od;

  always_comb
    for (int i = 0; i < 4; i++) last_out[i] = fin_data[i] ^ subkeys[31][i];

  serpent_sbox u_s7 (.sel(3'd7), .x(last_out), .y(s7_out));

  assign fin_ready = !ov || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ov <= 1'b0;
      od <= '0;
    end else if (fin_ready) begin
      ov <= fin_valid;
      if (fin_valid)
        for (int i = 0; i < 4; i++) od[i] <= s7_out[i] ^ subkeys[32][i];
    end
  end
  assign out_valid = ov;
  assign out_data  = od;

  // ------------------------------------------------------ sequential round
  logic seq_busy;
  if (N_SEQ > 0) begin : g_seq
    typedef enum logic [1:0] {SQ_IDLE, SQ_RUN, SQ_DONE} sq_state_e;
    sq_state_e  state;
    logic [4:0] r;          // next round to compute while running
    block_t     s;
    block_t     fold_in, fold_out;
    logic [4:0] fold_r;
    logic       take;

    // A new block enters when the loop is idle, or finishing and the
    // output stage is taking the finished block this clock.
    assign take = (state == SQ_IDLE) || (state == SQ_DONE && fin_ready);
    assign pr[N_PAR] = take;

    always_comb begin
      if (state == SQ_RUN) begin
        fold_in = s;
        fold_r  = r;
      end else begin
        fold_in = pd[N_PAR];
        fold_r  = 5'(N_PAR);
      end
    end
    serpent_fold u_fold (.x(fold_in), .k(subkeys[6'(fold_r)]), .sel(fold_r[2:0]),
                         .y(fold_out));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        state <= SQ_IDLE;
        r     <= '0;
        s     <= '0;
      end else begin
        unique case (state)
          SQ_RUN: begin
            s <= fold_out;
            r <= r + 5'd1;
            if (r == 5'd30) state <= SQ_DONE;
          end
          default: if (take) begin
            if (pv[N_PAR]) begin
              s     <= fold_out;
              r     <= 5'(N_PAR + 1);
              state <= (N_PAR == 30) ? SQ_DONE : SQ_RUN;
            end else begin
              state <= SQ_IDLE;
            end
          end
        endcase
      end
    end

    assign fin_valid = (state == SQ_DONE);
    assign fin_data  = s;
    assign seq_busy  = (state != SQ_IDLE);
  end else begin : g_noseq
    assign fin_valid = pv[N_PAR];
    assign fin_data  = pd[N_PAR];
    assign pr[N_PAR] = fin_ready;
    assign seq_busy  = 1'b0;
  end

  // ------------------------------------------------------------------ EOT
  logic pipe_busy;
  always_comb begin
    pipe_busy = 1'b0;
    for (int p = 1; p <= N_PAR; p++) pipe_busy |= pv[p];
  end

  typedef enum logic {EOT_IDLE, EOT_SEND} eot_state_e;
  eot_state_e eot_state;

  assign idle         = !pipe_busy && !seq_busy && !ov;
  assign in_eot_ready = idle && (eot_state == EOT_IDLE) && !in_valid;
  assign out_eot_valid = (eot_state == EOT_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eot_state <= EOT_IDLE;
    else if (eot_state == EOT_IDLE && in_eot_valid && in_eot_ready) eot_state <= EOT_SEND;
    else if (eot_state == EOT_SEND && out_eot_ready) eot_state <= EOT_IDLE;
  end

  // Handshake rules: an offered block must stay until it is taken.
  property p_hold_out;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold_out: assert property (p_hold_out);

endmodule
