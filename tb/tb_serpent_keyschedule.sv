// Testbench for serpent_keyschedule: random keys of 128, 192 and 256 bits;
// all 33 subkeys (32 from the four stream beats, K32 from the parallel S3)
// compared with the reference key schedule, including the padding rule.
module tb_serpent_keyschedule;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         key_valid, key_ready, ks_valid, ks_ready, eot_valid, eot_ready, last_valid;
  logic [255:0] key;
  key_len_e     key_len;
  block_t [7:0] ks_keys;
  block_t       last_key;
  int checks = 0, failures = 0;

  serpent_keyschedule dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    rkeys_t exp;
    int bits, beat;
    key_valid = 0; ks_ready = 0; eot_ready = 0; key = '0; key_len = KEY_256;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      @(negedge clk);
      for (int j = 0; j < 8; j++) key[32*j +: 32] = $urandom;
      key_len = key_len_e'(n % 3);
      bits = (n % 3 == 0) ? 128 : (n % 3 == 1) ? 192 : 256;
      exp = ref_subkeys(key, bits);   // upper key bits are random garbage for short keys
      key_valid = 1;
      do @(posedge clk); while (!key_ready);
      @(negedge clk);
      key_valid = 0;
      beat = 0;
      while (beat < 4) begin
        ks_ready = $urandom % 2;
        @(posedge clk);
        if (ks_valid && ks_ready) begin
          for (int g = 0; g < 8; g++)
            chk(ks_keys[g] == exp[8 * beat + g], $sformatf("key %0d bits %0d K%0d", n, bits, 8 * beat + g));
          beat++;
        end
        @(negedge clk);
      end
      ks_ready = 0;
      chk(last_valid && last_key == exp[32], "K32");
      chk(eot_valid, "eot");
      eot_ready = 1;
      @(negedge clk);
      eot_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
