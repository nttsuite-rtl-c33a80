// tb_pnc_workloads: the transform sizes of the paper's Pease_nc results,
// each on an accelerator built for that size: with 16 butterfly cores 1024
// and 16384 points (4096 is tb_pnc_top_full), and with 4 cores 1024, 4096,
// 16384 and 65536 points. Each runs one transform through tb_pnc_top_env,
// which checks every result word and the cycle count
// L * (N/(2B) + DRAIN_CYC), and that count against the paper's latency
// for that size at its 196 MHz clock. The six builds run side by side on one clock.
module tb_pnc_workloads;
  import pnc_pkg::*;

  localparam int NCFG = 6;
  localparam int unsigned CFG_N [NCFG] = '{1024, 16384, 1024, 4096, 16384, 65536};
  localparam int unsigned CFG_B [NCFG] = '{16,   16,    4,    4,    4,     4};
  // paper's latencies (2.27, 37.50, 7.18, 31.93, 146.96, 669.30 us) x 196 MHz
  localparam int unsigned CFG_P [NCFG] = '{445,  7350,  1408, 6259, 28805, 131183};

  logic clk = 0, rst_n = 0;
  int c[NCFG], f[NCFG];
  logic d[NCFG];

  always #5 clk = ~clk;

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    localparam int unsigned N = CFG_N[i];
    localparam int unsigned B = CFG_B[i];
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

    tb_pnc_top_env #(.N(N), .B(B), .RUNS(1), .PAPER_CYC(CFG_P[i])) env (.*,
      .p_issue (dut.u_ntt.issue),
      .p_write (dut.u_ntt.wr_valid),
      .p_src   (dut.u_ntt.src),
      .p_drain (dut.u_ntt.u_ctrl.state == ST_DRAIN),
      .checks  (c[i]), .failures(f[i]), .finished(d[i]));
  end

  function automatic int sum(int v[NCFG]);
    int s = 0;
    foreach (v[i]) s += v[i];
    return s;
  endfunction

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f));
    $finish;
  end
endmodule
