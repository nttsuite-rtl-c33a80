// tb_pnc_ctrl: runs the sequencer at the default size (4096 points, 16
// cores: 12 stages of 128 row groups, 1596 busy cycles) and at 32 points with
// 4 cores, through tb_pnc_ctrl_env.
module tb_pnc_ctrl;
  logic clk = 0, rst_n = 0;
  int c0, f0, c1, f1;
  logic d0, d1;

  always #5 clk = ~clk;

  tb_pnc_ctrl_env #(.N(4096), .B(16)) e_full  (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  tb_pnc_ctrl_env #(.N(32),   .B(4))  e_small (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
