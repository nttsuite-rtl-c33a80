// tb_pnc_top: end-to-end runs of the whole accelerator at two reduced
// sizes: 64 points on 4 cores (the memory set of the paper's block diagram:
// 8 vector banks, 4 twiddle and 4 quotient tables; even stage count, result
// in array 0) and 128 points on 4 cores (odd stage count, result in array 1).
// Each does two transforms through tb_pnc_top_env.
module tb_pnc_top;
  import pnc_pkg::*;

  logic clk = 0, rst_n = 0;
  int c[2], f[2];
  logic d[2];

  always #5 clk = ~clk;

  for (genvar i = 0; i < 2; i++) begin : g_cfg
    localparam int unsigned N = (i == 0) ? 64 : 128;
    localparam int unsigned B = 4;
    localparam int unsigned L = $clog2(N);
    logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
    logic s_arvalid, s_arready, s_rvalid, s_rready;
    logic [7:0] s_awaddr, s_araddr;
    logic [31:0] s_wdata, s_rdata, h_wdata, h_rdata;
    logic [3:0] s_wstrb;
    logic [1:0] s_bresp, s_rresp;
    logic h_valid, h_ready, h_we, h_rvalid, irq;
    region_e h_region;
    logic [L-1:0] h_addr;

    pnc_top #(.N(N), .B(B)) dut (.*);

    tb_pnc_top_env #(.N(N), .B(B), .RUNS(2)) env (.*,
      .p_issue (dut.u_ntt.issue),
      .p_write (dut.u_ntt.wr_valid),
      .p_src   (dut.u_ntt.src),
      .p_drain (dut.u_ntt.u_ctrl.state == ST_DRAIN),
      .checks  (c[i]), .failures(f[i]), .finished(d[i]));
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1], f[0] + f[1] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1], f[0] + f[1]);
    $finish;
  end
endmodule
