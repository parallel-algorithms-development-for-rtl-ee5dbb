// Testbench for serpent_fold: random blocks and subkeys for every S-box
// number, against LT(S_i(x ^ k)) from the reference model.
module tb_serpent_fold;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  block_t    x, k, y;
  sbox_sel_t sel;
  int checks = 0, failures = 0;

  serpent_fold dut (.x, .k, .sel, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rblk_t exp;
    for (int s = 0; s < 8; s++) begin
      repeat (40) begin
        sel = sbox_sel_t'(s);
        x = rand_blk();
        k = rand_blk();
        #1;
        exp = ref_lt(ref_sbox(s, x ^ k));
        checks++;
        if (y !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL S%0d y=%h exp=%h", s, y, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
