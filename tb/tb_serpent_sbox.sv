// Testbench for serpent_sbox: every S-box number, every 4-bit slice value
// (placed in all 32 slices at once), then random blocks, against the
// reference tables.
module tb_serpent_sbox;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  sbox_sel_t sel;
  block_t    x, y;
  int checks = 0, failures = 0;

  serpent_sbox dut (.sel, .x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    rblk_t exp;
    #1;
    exp = ref_sbox(int'(sel), x);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL S%0d x=%h y=%h exp=%h", sel, x, y, exp);
    end
  endtask

  initial begin
    for (int s = 0; s < 8; s++) begin
      sel = sbox_sel_t'(s);
      for (int v = 0; v < 16; v++) begin
        for (int k = 0; k < 4; k++) x[k] = v[k] ? '1 : '0;
        check();
      end
      repeat (50) begin
        x = rand_blk();
        check();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
