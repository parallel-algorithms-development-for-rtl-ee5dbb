// Multi-way Serpent encryptor: SMAP(VMAP_n(SMAP(SERPENTESEG))).
//
// N_WAYS copies of serpent_eseg side by side, one per element of a vector of
// blocks. Every transfer on the input channel carries N_WAYS plaintext
// blocks, and every transfer on the output channel carries the N_WAYS
// ciphertexts in the same lane order. All copies read the one subkey set.
// The multi-way form comes from the description. It gives no value for n, only
// that n is bounded by what fits on the device, so N_WAYS defaults to 1
// (the plain SMAP(SERPENTESEG) engine).
//
// How the lanes are kept together (this design's choice): a vector is taken
// only when every lane is ready, and a result vector is given out only when
// every lane holds its block. The lanes are identical and start together, so
// they stay in lockstep and no lane ever waits for another. The EOT is passed
// to all lanes at once, only when all of them can take it and no vector is
// offered. The output EOT is sent once all lanes have theirs.
//
// Interface: as serpent_eseg, with in_data and out_data widened to
// N_WAYS blocks (lane i in element i).
// Timing: as serpent_eseg. Latency is 31 clocks and the interval is
// 31-N_PAR clocks, now for N_WAYS blocks at a time.
module serpent_eseg_multi
  import serpent_pkg::*;
#(
  parameter int unsigned N_WAYS = 1,
  parameter int unsigned N_PAR  = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  block_t              subkeys [NUM_SUBKEYS],
  input  logic                keys_valid,
  input  logic                in_valid,
  output logic                in_ready,
  input  block_t [N_WAYS-1:0] in_data,
  input  logic                in_eot_valid,
  output logic                in_eot_ready,
  output logic                out_valid,
  input  logic                out_ready,
  output block_t [N_WAYS-1:0] out_data,
  output logic                out_eot_valid,
  input  logic                out_eot_ready,
  output logic                idle
);

  initial assert (N_WAYS >= 1) else $fatal(1, "N_WAYS must be at least 1");

  logic [N_WAYS-1:0] l_in_ready, l_in_eot_ready, l_out_valid, l_out_eot_valid, l_idle;

  // A lane's in_ready does not depend on its in_valid, and its out_valid and
  // out_eot_valid are registers, so these AND-joins form no loop.
  assign in_ready      = &l_in_ready;
  assign in_eot_ready  = &l_in_eot_ready && !in_valid;
  assign out_valid     = &l_out_valid;
  assign out_eot_valid = &l_out_eot_valid;
  assign idle          = &l_idle;

  for (genvar i = 0; i < N_WAYS; i++) begin : g_lane
    serpent_eseg #(.N_PAR(N_PAR)) u_eseg (
      .clk, .rst_n,
      .subkeys,
      .keys_valid,
      .in_valid     (in_valid && in_ready),
      .in_ready     (l_in_ready[i]),
      .in_data      (in_data[i]),
      .in_eot_valid (in_eot_valid && in_eot_ready),
      .in_eot_ready (l_in_eot_ready[i]),
      .out_valid    (l_out_valid[i]),
      .out_ready    (out_ready && out_valid),
      .out_data     (out_data[i]),
      .out_eot_valid(l_out_eot_valid[i]),
      .out_eot_ready(out_eot_ready && out_eot_valid),
      .idle         (l_idle[i])
    );
  end

endmodule
