// tb_pnc_host_mux: host port of a 64-point, 4-core configuration against a
// behavioural model of the memories. Checks that input words land at the
// bit-reversed index (bank = index mod 4, row = index / 4) of array 0, that
// result reads come from the array named by res_sel in natural order, that
// twiddle writes reach every core's copy and read back from copy 0, that
// out-of-table twiddle reads return zero, and that while busy the host is
// held off and the engine's port signals pass through unchanged.
module tb_pnc_host_mux;
  import tb_pnc_util_pkg::*;
  import pnc_pkg::*;

  localparam int N = 64, B = 4, L = 6, RAW = 4, TAW = 5;

  logic clk = 0, rst_n = 0;
  logic busy, res_sel;
  logic h_valid, h_ready, h_we, h_rvalid;
  region_e h_region;
  logic [L-1:0] h_addr;
  logic [31:0] h_wdata, h_rdata;
  logic [1:0][B-1:0][1:0]          e_en, e_we, m_en, m_we;
  logic [1:0][B-1:0][1:0][RAW-1:0] e_addr, m_addr;
  logic [1:0][B-1:0][1:0][31:0]    e_wdata, m_wdata, m_rdata;
  logic [B-1:0] t_en, t_we, th_en, th_we;
  logic [TAW-1:0] t_addr;
  logic [31:0] t_wdata, t_rdata, th_rdata;
  int checks = 0, failures = 0;

  pnc_host_mux #(.N(N), .B(B), .W(32)) dut (.*);

  // memory model
  logic [31:0] vmem [2][B][N/B];
  logic [31:0] twm [B][N/2], twhm [B][N/2];
  always @(posedge clk) begin
    for (int a = 0; a < 2; a++) for (int k = 0; k < B; k++) for (int q = 0; q < 2; q++)
      if (m_en[a][k][q]) begin
        m_rdata[a][k][q] <= vmem[a][k][m_addr[a][k][q]];
        if (m_we[a][k][q]) vmem[a][k][m_addr[a][k][q]] <= m_wdata[a][k][q];
      end
    for (int j = 0; j < B; j++) begin
      if (t_en[j] && t_we[j]) twm[j][t_addr] <= t_wdata;
      if (th_en[j] && th_we[j]) twhm[j][t_addr] <= t_wdata;
    end
    if (t_en[0]) t_rdata <= twm[0][t_addr];
    if (th_en[0]) th_rdata <= twhm[0][t_addr];
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(region_e r, int a, logic [31:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 1; h_region = r; h_addr = L'(a); h_wdata = d;
    @(negedge clk);
    h_valid = 0;
  endtask

  task automatic hread(region_e r, int a, output logic [31:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 0; h_region = r; h_addr = L'(a);
    @(negedge clk);
    h_valid = 0;
    if (!h_rvalid) begin failures++; $display("FAIL no rvalid"); end
    d = h_rdata;
  endtask

  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h want %h", what, got, want);
    end
  endtask

  initial begin
    logic [31:0] x [N];
    logic [31:0] d;
    int s;
    busy = 0; res_sel = 0; h_valid = 0; h_we = 0; h_region = REG_INPUT; h_addr = 0; h_wdata = 0;
    e_en = '0; e_we = '0; e_addr = '0; e_wdata = '0;
    for (int a = 0; a < 2; a++) for (int k = 0; k < B; k++) for (int r = 0; r < N / B; r++)
      vmem[a][k][r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // input region: bit-reversed placement
    for (int i = 0; i < N; i++) begin x[i] = $urandom(); hwrite(REG_INPUT, i, x[i]); end
    for (int i = 0; i < N; i++) begin
      s = bitrev(i, L);
      expect_eq(vmem[0][s % B][s / B], x[i], "input placement");
      hread(REG_INPUT, i, d);
      expect_eq(d, x[i], "input readback");
    end
    // result region, both arrays, natural order
    for (int a = 0; a < 2; a++) begin
      res_sel = 1'(a);
      for (int i = 0; i < N; i++) vmem[a][i % B][i / B] = 32'(i * 7 + a);
      for (int i = 0; i < N; i++) begin
        hread(REG_RESULT, i, d);
        expect_eq(d, 32'(i * 7 + a), "result read");
      end
    end
    // twiddle tables: broadcast write, read back
    for (int e = 0; e < N / 2; e++) begin
      hwrite(REG_TW, e, 32'(1000 + e));
      hwrite(REG_TWH, e, 32'(5000 + e));
    end
    for (int e = 0; e < N / 2; e++) begin
      for (int j = 0; j < B; j++) begin
        expect_eq(twm[j][e], 32'(1000 + e), "tw copy");
        expect_eq(twhm[j][e], 32'(5000 + e), "twh copy");
      end
      hread(REG_TW, e, d);  expect_eq(d, 32'(1000 + e), "tw read");
      hread(REG_TWH, e, d); expect_eq(d, 32'(5000 + e), "twh read");
    end
    hread(REG_TW, N / 2 + 3, d); expect_eq(d, 0, "tw out of table");
    // busy: host held off, engine passes through
    @(negedge clk);
    busy = 1; h_valid = 1; h_we = 1; h_region = REG_INPUT; h_addr = 0; h_wdata = 32'hDEAD;
    for (int c = 0; c < 50; c++) begin
      e_en = 16'($urandom()); e_we = 16'($urandom());
      for (int a = 0; a < 2; a++) for (int k = 0; k < B; k++) for (int q = 0; q < 2; q++) begin
        e_addr[a][k][q] = RAW'($urandom()); e_wdata[a][k][q] = $urandom();
      end
      #1;
      checks++;
      if (h_ready || m_en !== e_en || m_we !== e_we || m_addr !== e_addr || m_wdata !== e_wdata) begin
        failures++;
        $display("FAIL pass-through while busy");
      end
      @(negedge clk);
    end
    e_en = '0; e_we = '0; h_valid = 0; busy = 0;
    checks++;
    if (t_en != 0 || th_en != 0) begin failures++; $display("FAIL twiddle access while busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
