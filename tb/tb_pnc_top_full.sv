// tb_pnc_top_full: one complete 4096-point transform on the accelerator at
// its default parameters (16 butterfly cores, 32-bit words), checked word
// for word against a direct transform, with the cycle count checked against
// 12 * (128 + DRAIN_CYC) = 1596 cycles and against the paper's measured
// 8.60 us at 196 MHz, i.e. at most 1686 cycles.
module tb_pnc_top_full;
  import pnc_pkg::*;

  localparam int unsigned L = 12;

  logic clk = 0, rst_n = 0;
  int checks, failures;
  logic finished;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata, h_wdata, h_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic h_valid, h_ready, h_we, h_rvalid, irq;
  region_e h_region;
  logic [L-1:0] h_addr;

  always #5 clk = ~clk;

  pnc_top dut (.*);

  tb_pnc_top_env #(.N(4096), .B(16), .RUNS(1), .PAPER_CYC(1686)) env (.*,
    .p_issue (dut.u_ntt.issue),
    .p_write (dut.u_ntt.wr_valid),
    .p_src   (dut.u_ntt.src),
    .p_drain (dut.u_ntt.u_ctrl.state == ST_DRAIN));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
