// Testbench for serpent_subkey_store: streams four beats of eight random
// subkeys and an EOT with K32, with idle clocks between beats; checks that
// keys_valid rises only with the EOT, that all 33 subkeys read back in
// place, and that clear drops keys_valid and restarts the beat count.
module tb_serpent_subkey_store;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         clear, ks_valid, ks_ready, eot_valid, eot_ready, keys_valid;
  block_t [7:0] ks_keys;
  block_t       last_key;
  block_t       subkeys [NUM_SUBKEYS];
  int checks = 0, failures = 0;

  serpent_subkey_store dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
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
    rblk_t exp [33];
    clear = 0; ks_valid = 0; eot_valid = 0; ks_keys = '0; last_key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      chk(!keys_valid, "clear drops keys_valid");
      for (int i = 0; i < 33; i++) exp[i] = rand_blk();
      for (int b = 0; b < 4; b++) begin
        repeat ($urandom % 3) @(negedge clk);
        ks_valid = 1;
        for (int g = 0; g < 8; g++) ks_keys[g] = exp[8 * b + g];
        @(negedge clk);
        ks_valid = 0;
        ks_keys = '1;
        chk(!keys_valid, "keys_valid before eot");
      end
      eot_valid = 1;
      last_key = exp[32];
      @(negedge clk);
      eot_valid = 0;
      last_key = '0;
      chk(keys_valid && ks_ready && eot_ready, "keys_valid after eot");
      for (int i = 0; i < 33; i++) chk(subkeys[i] == exp[i], $sformatf("K%0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
