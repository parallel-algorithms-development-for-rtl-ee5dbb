// The three encryption designs side by side: the stream-based single round
// (N_PAR = 0), the partially pipelined default (N_PAR = 2, 29 sequential
// rounds) and the fully pipelined one (N_PAR = 31), plus a two-lane
// multi-way engine (N_WAYS = 2, N_PAR = 2). Each runs the zero-key known answer and a burst of random blocks; see tb_serpent_design_run.
module tb_serpent_designs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [4];
  int   c [4];
  int   f [4];

  tb_serpent_design_run #(.N_PAR(0))  u_seq  (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]));
  tb_serpent_design_run #(.N_PAR(2))  u_part (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]));
  tb_serpent_design_run #(.N_PAR(31)) u_full (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]));
  tb_serpent_design_run #(.N_WAYS(2), .N_PAR(2)) u_two (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3]);
    $finish;
  end
endmodule
