// Helper for tb_serpent_designs: runs one serpent_encrypt_top of a given
// N_PAR through the zero-key known answer and a burst of random blocks under
// a random 256-bit key, checks every ciphertext against the reference model,
// and checks that in a burst the ciphertext blocks leave every 31 - N_PAR
// clocks (every clock for the fully pipelined N_PAR = 31). With N_WAYS > 1
// (the multi-way form) each transfer carries N_WAYS blocks, and each lane is
// checked on its own.
module tb_serpent_design_run
  import serpent_pkg::*;
  import serpent_ref_pkg::*;
#(
  parameter int unsigned N_WAYS = 1,
  parameter int unsigned N_PAR  = 2,
  parameter int          BLOCKS = 12
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  logic         key_valid, key_ready, keys_valid;
  logic [255:0] key;
  key_len_e     key_len;
  logic         pt_valid, pt_ready, pt_eot_valid, pt_eot_ready;
  logic         ct_valid, ct_ready, ct_eot_valid, ct_eot_ready;
  typedef block_t [N_WAYS-1:0] vec_t;
  vec_t         pt_data, ct_data;
  logic         dct_valid, dct_ready, dct_eot_valid, dct_eot_ready;
  logic         dpt_valid, dpt_ready, dpt_eot_valid, dpt_eot_ready;
  block_t       dct_data, dpt_data;

  serpent_encrypt_top #(.N_WAYS(N_WAYS), .N_PAR(N_PAR)) dut (.*);

  int     cyc = 0, nout = 0, last_out = -1, gaps = 0;
  bit     burst = 0;
  rkeys_t ks;
  vec_t   exp_q [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL N_WAYS=%0d N_PAR=%0d %s", N_WAYS, N_PAR, what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (pt_valid && pt_ready) begin
        vec_t ev;
        for (int l = 0; l < N_WAYS; l++) ev[l] = ref_encrypt(ks, pt_data[l]);
        exp_q.push_back(ev);
      end
      if (ct_valid && ct_ready) begin
        vec_t e;
        e = exp_q.pop_front();
        for (int l = 0; l < N_WAYS; l++)
          chk(ct_data[l] == e[l], $sformatf("transfer %0d lane %0d", nout, l));
        if (burst && last_out >= 0) begin
          chk(cyc - last_out == ((N_PAR == 31) ? 1 : 31 - N_PAR),
              $sformatf("output interval %0d", cyc - last_out));
          gaps++;
        end
        last_out = cyc;
        nout++;
      end
    end
  end

  initial begin
    logic [255:0] k;
    checks = 0; failures = 0; done = 0;
    key_valid = 0; key = '0; key_len = KEY_128;
    pt_valid = 0; pt_data = '0; pt_eot_valid = 0;
    ct_ready = 1; ct_eot_ready = 1;
    dct_valid = 0; dct_data = '0; dct_eot_valid = 0; dpt_ready = 1; dpt_eot_ready = 1;
    @(posedge rst_n);
    // known answer: zero 128-bit key, zero block
    @(negedge clk);
    key_valid = 1;
    ks = ref_subkeys('0, 128);
    #1;
    while (!key_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    key_valid = 0;
    while (!keys_valid) @(negedge clk);
    pt_valid = 1; pt_data = '0;
    #1;
    while (!pt_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    pt_valid = 0;
    while (nout < 1) @(negedge clk);
    for (int l = 0; l < N_WAYS; l++)
      chk(ct_data[l] == 128'he9ba668276b81896d093a9e67ab12036, "known answer");
    // random 256-bit key, burst of blocks offered back to back
    for (int j = 0; j < 8; j++) k[32*j +: 32] = $urandom;
    key_valid = 1; key = k; key_len = KEY_256;
    ks = ref_subkeys(k, 256);
    #1;
    while (!key_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    key_valid = 0;
    while (!keys_valid) @(negedge clk);
    burst = 1;
    last_out = -1;
    for (int i = 0; i < BLOCKS; i++) begin
      pt_valid = 1;
      for (int l = 0; l < N_WAYS; l++) pt_data[l] = rand_blk();
      #1;
      while (!pt_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    pt_valid = 0;
    while (exp_q.size() != 0) @(negedge clk);
    chk(nout == BLOCKS + 1 && gaps == BLOCKS - 1, "all blocks out");
    done = 1;
  end
endmodule
