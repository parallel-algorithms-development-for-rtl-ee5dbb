// Testbench for serpent_generate_ws: random key words, the four output beats
// and the last four prekeys compared with the reference expansion; the
// output is back-pressured at random; the first beat must appear exactly
// 132 clocks after the key handshake (one prekey per clock).
module tb_serpent_generate_ws;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, out_valid, out_ready, eot_valid, eot_ready, last_valid;
  word_t [7:0]  in_words;
  word_t [31:0] out_words;
  block_t       last_words;
  int checks = 0, failures = 0;
  int cyc = 0;   // clock edges since reset
  always @(posedge clk) cyc <= cyc + 1;

  serpent_generate_ws dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
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
    rws_t w;
    logic [255:0] k;
    int t0, beat;
    in_valid = 0; out_ready = 0; eot_ready = 0; in_words = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      for (int j = 0; j < 8; j++) k[32*j +: 32] = $urandom;
      w = ref_prekeys(k);
      @(negedge clk);
      in_valid = 1;
      for (int j = 0; j < 8; j++) in_words[j] = k[32*j +: 32];
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
      t0 = cyc;
      in_valid = 0;
      in_words = '1;   // must no longer matter
      while (!out_valid) @(negedge clk);
      chk(cyc - t0 == 132, $sformatf("first beat after %0d clocks", cyc - t0));
      chk(last_valid, "last_valid with first beat");
      for (int j = 0; j < 4; j++) chk(last_words[j] == w[136 + j], "last prekeys");
      beat = 0;
      while (beat < 4) begin
        out_ready = ($urandom % 3) != 0;
        @(posedge clk);
        if (out_valid && out_ready) begin
          for (int j = 0; j < 32; j++)
            chk(out_words[j] == w[8 + 32 * beat + j], $sformatf("beat %0d word %0d", beat, j));
          beat++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      chk(!out_valid, "no fifth beat");
      repeat ($urandom % 3) @(negedge clk);
      chk(eot_valid, "eot after four beats");
      eot_ready = 1;
      @(negedge clk);
      eot_ready = 0;
      chk(!eot_valid && in_ready, "idle after eot");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
