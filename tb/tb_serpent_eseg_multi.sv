// Testbench for serpent_eseg_multi with three lanes (N_WAYS = 3, N_PAR = 2).
//
// Each transfer carries three random plaintexts. Every lane's ciphertext is
// checked against the reference encryption with the shared random subkeys,
// so a lane mix-up or a lane left behind is caught. All lanes must present
// their results in the same clock. Phase 1: the input waits while keys_valid is low (stall);
// isolated vectors check the latency (output handshake 32 clocks after the
// input handshake), then a burst checks that vectors leave every 31 - N_PAR
// clocks. Phase 2: random output back-pressure. Phase 3: an EOT offered
// while vectors are in flight waits until every lane has drained, and the
// output EOT follows the last vector.
module tb_serpent_eseg_multi;
  import serpent_pkg::*;
  import serpent_ref_pkg::*;

  localparam int unsigned N_PAR  = 2;
  localparam int unsigned N_WAYS = 3;
  typedef block_t [N_WAYS-1:0] vec_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  block_t subkeys [NUM_SUBKEYS];
  logic   keys_valid, in_valid, in_ready, in_eot_valid, in_eot_ready;
  logic   out_valid, out_ready, out_eot_valid, out_eot_ready, idle;
  vec_t   in_data, out_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  serpent_eseg_multi #(.N_WAYS(N_WAYS), .N_PAR(N_PAR)) dut (.*);

  rkeys_t ks;
  vec_t   exp_q [$];
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
      if (dut.l_out_valid != '0 && dut.l_out_valid != '1) begin
        failures++;
        $display("FAIL lanes out of step: %b", dut.l_out_valid);
      end
      if (in_valid && in_ready) begin
        vec_t ev;
        for (int l = 0; l < N_WAYS; l++) ev[l] = ref_encrypt(ks, in_data[l]);
        exp_q.push_back(ev);
        tin_q.push_back(cyc);
      end
      if (out_valid && out_ready) begin
        vec_t e;
        int   t;
        e = exp_q.pop_front();
        t = tin_q.pop_front();
        for (int l = 0; l < N_WAYS; l++)
          chk(out_data[l] == e[l], $sformatf("vector %0d lane %0d: %h exp %h", nout, l, out_data[l], e[l]));
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
      for (int l = 0; l < N_WAYS; l++) in_data[l] = rand_blk();
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
