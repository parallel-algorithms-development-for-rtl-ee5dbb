// End-to-end testbench of serpent_encrypt_top with every parameter at its
// default (2 pipelined rounds, 29 sequential).
//
// Loads keys of 128, 192 and 256 bits and encrypts streams of blocks, each
// ciphertext checked against the reference model. The first key is all
// zeros (128 bits) with an all-zero block, whose ciphertext is the published
// Serpent known answer 3620b17ae6a993d09618b8768266bae9 (bytes, least
// significant first). The test counts each mechanism of the design and fails
// if one never happens:
//   key_wait    - a new key offered while blocks are in flight waits,
//   pt_stall    - plaintext offered while the subkeys are being produced waits,
//   ct_backpres - the ciphertext consumer holds off a valid block,
//   eot_drain   - an input EOT offered with blocks in flight waits for them,
//   both_busy   - encryptor and decryptor work at the same time (each
//                 decrypted block must give back its plaintext),
//   len128/192/256 - each key length is used.
module tb_serpent_encrypt_top;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         key_valid, key_ready, keys_valid;
  logic [255:0] key;
  key_len_e     key_len;
  logic         pt_valid, pt_ready, pt_eot_valid, pt_eot_ready;
  logic         ct_valid, ct_ready, ct_eot_valid, ct_eot_ready;
  block_t       pt_data, ct_data;
  logic         dct_valid, dct_ready, dct_eot_valid, dct_eot_ready;
  logic         dpt_valid, dpt_ready, dpt_eot_valid, dpt_eot_ready;
  block_t       dct_data, dpt_data;

  serpent_encrypt_top dut (.*);

  int checks = 0, failures = 0, cyc = 0, nout = 0, neot = 0;
  int key_wait = 0, pt_stall = 0, ct_backpres = 0, eot_drain = 0;
  int both_busy = 0, ndec = 0, ndeot = 0;
  rblk_t dec_q [$];
  int len_used [3] = '{0, 0, 0};
  rkeys_t ks;
  rblk_t  exp_q [$];
  bit     kat_pending = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (key_valid && !key_ready && exp_q.size() != 0) key_wait++;
      if (pt_valid && !pt_ready && !keys_valid) pt_stall++;
      if (ct_valid && !ct_ready) ct_backpres++;
      if (pt_eot_valid && !pt_eot_ready && exp_q.size() != 0) eot_drain++;
      if (pt_valid && pt_ready) exp_q.push_back(ref_encrypt(ks, pt_data));
      if (ct_valid && ct_ready) begin
        rblk_t e;
        e = exp_q.pop_front();
        chk(ct_data == e, $sformatf("block %0d: %h exp %h", nout, ct_data, e));
        if (kat_pending) begin
          chk(ct_data == 128'he9ba668276b81896d093a9e67ab12036, "known answer");
          kat_pending = 0;
        end
        nout++;
      end
      if (!dut.enc_idle && !dut.dec_idle) both_busy++;
      if (dpt_valid && dpt_ready) begin
        rblk_t e;
        e = dec_q.pop_front();
        chk(dpt_data == e, $sformatf("decrypted block %0d: %h exp %h", ndec, dpt_data, e));
        ndec++;
      end
      if (dpt_eot_valid && dpt_eot_ready) begin
        chk(dec_q.size() == 0, "decryption EOT after the last block");
        ndeot++;
      end
      if (ct_eot_valid && ct_eot_ready) begin
        chk(exp_q.size() == 0, "EOT after the last block");
        neot++;
      end
    end
  end

  // Offers a key; the reference subkeys switch when the key is taken.
  task automatic load_key(logic [255:0] k, int bits);
    @(negedge clk);
    key_valid = 1;
    key = k;
    key_len = (bits == 128) ? KEY_128 : (bits == 192) ? KEY_192 : KEY_256;
    #1;
    while (!key_ready) begin
      @(negedge clk);
      #1;
    end
    ks = ref_subkeys(k, bits);
    len_used[int'(key_len)]++;
    @(negedge clk);
    key_valid = 0;
  endtask

  task automatic send(rblk_t b);
    @(negedge clk);
    pt_valid = 1;
    pt_data  = b;
    #1;
    while (!pt_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    pt_valid = 0;
  endtask

  // Offers the ciphertext of a random plaintext to the decryptor.
  task automatic send_dec();
    rblk_t p;
    p = rand_blk();
    @(negedge clk);
    dct_valid = 1;
    dct_data  = ref_encrypt(ks, p);
    #1;
    while (!dct_ready) begin
      @(negedge clk);
      #1;
    end
    dec_q.push_back(p);
    @(negedge clk);
    dct_valid = 0;
  endtask

  task automatic send_dec_eot();
    @(negedge clk);
    dct_eot_valid = 1;
    #1;
    while (!dct_eot_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    dct_eot_valid = 0;
  endtask

  task automatic send_eot();
    @(negedge clk);
    pt_eot_valid = 1;
    #1;
    while (!pt_eot_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    pt_eot_valid = 0;
  endtask

  initial begin
    int n0;
    logic [255:0] k;
    key_valid = 0; key = '0; key_len = KEY_128;
    pt_valid = 0; pt_data = '0; pt_eot_valid = 0;
    ct_ready = 1; ct_eot_ready = 1;
    dct_valid = 0; dct_data = '0; dct_eot_valid = 0; dpt_ready = 1; dpt_eot_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Known answer, with the block offered before the subkeys are ready.
    load_key('0, 128);
    kat_pending = 1;
    send('0);
    while (exp_q.size() != 0) @(negedge clk);

    // Random keys of each length, streams with back-pressure.
    for (int n = 0; n < 3; n++) begin
      for (int j = 0; j < 8; j++) k[32*j +: 32] = $urandom;
      // offered while the previous stream is still in flight
      send(rand_blk());
      send(rand_blk());
      load_key(k, (n == 0) ? 192 : (n == 1) ? 256 : 128);
      n0 = nout;
      fork
        repeat (8) send(rand_blk());
        begin
          repeat (3) send_dec();
          send_dec_eot();
        end
        while (nout < n0 + 8) begin
          @(negedge clk);
          ct_ready = ($urandom % 3) != 0;
        end
      join
      ct_ready = 1;
      send(rand_blk());
      send_eot();
    end
    while (exp_q.size() != 0 || neot < 3 || ndeot < 3) @(negedge clk);

    chk(nout == 34, $sformatf("blocks out %0d", nout));
    chk(ndec == 9, $sformatf("blocks decrypted %0d", ndec));
    $display("mechanisms: key_wait=%0d pt_stall=%0d ct_backpres=%0d eot_drain=%0d both_busy=%0d len128=%0d len192=%0d len256=%0d",
             key_wait, pt_stall, ct_backpres, eot_drain, both_busy, len_used[0], len_used[1], len_used[2]);
    chk(both_busy > 0, "encryption and decryption overlapped");
    chk(key_wait > 0, "key_wait happened");
    chk(pt_stall > 0, "pt_stall happened");
    chk(ct_backpres > 0, "ct_backpres happened");
    chk(eot_drain > 0, "eot_drain happened");
    for (int i = 0; i < 3; i++) chk(len_used[i] > 0, "every key length used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
