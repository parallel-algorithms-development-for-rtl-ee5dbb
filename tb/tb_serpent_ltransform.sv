// Testbench for serpent_ltransform: single-bit inputs in every position and
// random blocks, against the reference linear transformation.
module tb_serpent_ltransform;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  block_t x, y;
  int checks = 0, failures = 0;

  serpent_ltransform dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    rblk_t exp;
    #1;
    exp = ref_lt(x);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h y=%h exp=%h", x, y, exp);
    end
  endtask

  initial begin
    for (int b = 0; b < 128; b++) begin
      x = '0;
      x[b / 32][b % 32] = 1'b1;
      check();
    end
    repeat (200) begin
      x = rand_blk();
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
