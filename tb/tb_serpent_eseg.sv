// Testbench for serpent_eseg at its default configuration (N_PAR = 2).
//
// Random subkeys and plaintexts are checked against the reference encryption.
// Phase 1: input waits while keys_valid is low (stall); isolated blocks with
// the output always ready check the latency (output handshake 32 clocks after
// the input handshake: 31 clocks to appear, one to be taken), then a burst
// checks that blocks leave every 31 - N_PAR clocks. Phase 2: random output back-pressure.
// Phase 3: an EOT offered while blocks are in flight must wait until the
// encryptor has drained, and the output EOT must follow the last block.
module tb_serpent_eseg;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  localparam int unsigned N_PAR = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  block_t subkeys [NUM_SUBKEYS];
  logic   keys_valid, in_valid, in_ready, in_eot_valid, in_eot_ready;
  logic   out_valid, out_ready, out_eot_valid, out_eot_ready, idle;
  block_t in_data, out_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  serpent_eseg dut (.*);

  rkeys_t ks;
  rblk_t  exp_q [$];
  int     tin_q [$];
  int     last_out = -1, lat_checks = 0, gap_checks = 0, nout = 0, stalls = 0;
  bit     timing_phase = 1, isolated = 1, eot_seen = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && !in_ready && !keys_valid) stalls++;
      if (in_valid && in_ready) begin
        exp_q.push_back(ref_encrypt(ks, in_data));
        tin_q.push_back(cyc);
      end
      if (out_valid && out_ready) begin
        rblk_t e;
        int    t;
        e = exp_q.pop_front();
        t = tin_q.pop_front();
        chk(out_data == e, $sformatf("block %0d: %h exp %h", nout, out_data, e));
        if (timing_phase && isolated) begin
          chk(cyc - t == 32, $sformatf("latency %0d", cyc - t));
          lat_checks++;
        end
        if (timing_phase && !isolated && last_out >= 0) begin
          chk(cyc - last_out == 31 - N_PAR, $sformatf("output interval %0d", cyc - last_out));
          gap_checks++;
        end
        last_out = cyc;
        nout++;
      end
      if (out_eot_valid && out_eot_ready) begin
        chk(exp_q.size() == 0, "EOT after the last block");
        eot_seen = 1;
      end
    end
  end

  task automatic send(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = rand_blk();
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    for (int i = 0; i < 33; i++) begin
      ks[i] = rand_blk();
      subkeys[i] = ks[i];
    end
    keys_valid = 0; in_valid = 0; in_data = '0; in_eot_valid = 0;
    out_ready = 1; out_eot_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1
    fork
      send(1);
      begin repeat (10) @(negedge clk); keys_valid = 1; end
    join
    chk(stalls >= 9, "input stalled without keys");
    repeat (3) begin
      while (exp_q.size() != 0) @(negedge clk);
      send(1);
    end
    while (exp_q.size() != 0) @(negedge clk);
    isolated = 0;
    last_out = -1;
    send(8);
    while (exp_q.size() != 0) @(negedge clk);
    chk(lat_checks == 4 && gap_checks == 7, "timing measured");
    // phase 2
    timing_phase = 0;
    fork
      send(20);
      while (nout < 32) begin
        @(negedge clk);
        out_ready = ($urandom % 4) == 0;
      end
    join
    out_ready = 1;
    // phase 3
    send(3);
    @(negedge clk);
    in_eot_valid = 1;
    #1;
    while (!in_eot_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    chk(exp_q.size() == 0 && idle, "input EOT waits for drain");
    @(negedge clk);
    in_eot_valid = 0;
    repeat (3) @(negedge clk);
    chk(eot_seen && nout == 35, "output EOT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
