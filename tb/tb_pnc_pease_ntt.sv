// tb_pnc_pease_ntt: full transforms on the engine alone, at three shapes:
// 64 points / 4 cores (even stage count, result in array 0), 128 points /
// 8 cores (odd stage count, result in array 1) and 32 points / 16 cores (a
// single row group per stage).
module tb_pnc_pease_ntt;
  logic clk = 0, rst_n = 0;
  int c[3], f[3];
  logic d[3];

  always #5 clk = ~clk;

  tb_pnc_ntt_env #(.N(64),  .B(4))  e0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(d[0]));
  tb_pnc_ntt_env #(.N(128), .B(8))  e1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(d[1]));
  tb_pnc_ntt_env #(.N(32),  .B(16)) e2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(d[2]));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2]);
    $finish;
  end
endmodule
