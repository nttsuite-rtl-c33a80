// tb_pnc_top_env: host-side driver and checker for one pnc_top of size N, B.
//
// Acting as the host, it writes the modulus over AXI4-Lite, loads a random
// input vector and the twiddle / quotient tables through the host word port,
// starts the transform, and while it runs tries host accesses (which must be
// held off) and a second start (which must be refused with SLVERR). After
// irq it checks STATUS, the CYCLES register against L * (N/(2B) + DRAIN_CYC)
// and every result word against a direct O(N^2) transform (above 4096 points,
// against a textbook Cooley-Tukey transform). RUNS transforms
// are done back to back. Where PAPER_CYC is given (the paper's measured
// latency times its 196 MHz clock), the cycle count must not exceed it. The probe inputs, taken from inside the design,
// count how often each mechanism happened: array swaps between stages,
// pipeline drains, cycles with reads and writes in flight together (the
// II = 1 pipeline) and host stalls; a mechanism that never happened counts
// as a failure.
module tb_pnc_top_env #(
  parameter int unsigned N    = 64,
  parameter int unsigned B    = 4,
  parameter int unsigned RUNS = 2,
  // Cycle budget from the paper's measured latency at 196 MHz (0: none).
  parameter int unsigned PAPER_CYC = 0,
  localparam int unsigned L   = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             s_awvalid,
  input  logic             s_awready,
  output logic [7:0]       s_awaddr,
  output logic             s_wvalid,
  input  logic             s_wready,
  output logic [31:0]      s_wdata,
  output logic [3:0]       s_wstrb,
  input  logic             s_bvalid,
  output logic             s_bready,
  input  logic [1:0]       s_bresp,
  output logic             s_arvalid,
  input  logic             s_arready,
  output logic [7:0]       s_araddr,
  input  logic             s_rvalid,
  output logic             s_rready,
  input  logic [31:0]      s_rdata,
  input  logic [1:0]       s_rresp,
  output logic             h_valid,
  input  logic             h_ready,
  output logic             h_we,
  output pnc_pkg::region_e h_region,
  output logic [L-1:0]     h_addr,
  output logic [31:0]      h_wdata,
  input  logic             h_rvalid,
  input  logic [31:0]      h_rdata,
  input  logic             irq,
  // probes
  input  logic             p_issue,
  input  logic             p_write,
  input  logic             p_src,
  input  logic             p_drain,
  output int               checks,
  output int               failures,
  output logic             finished
);
  import tb_pnc_util_pkg::*;
  import pnc_pkg::*;

  localparam int unsigned EXP_CYC = L * (N / (2 * B) + DRAIN_CYC);

  int n_swap = 0, n_drain = 0, n_overlap = 0, n_stall = 0, n_reject = 0;
  logic src_q = 0, drain_q = 0;
  logic new_run = 0;  // set by the driver before each start

  always @(posedge clk) if (rst_n) begin
    if (p_issue) begin
      if (!new_run && p_src != src_q) n_swap++;
      src_q   <= p_src;
      new_run <= 0;
    end
    if (p_drain && !drain_q) n_drain++;
    drain_q <= p_drain;
    if (p_issue && p_write) n_overlap++;
    if (h_valid && !h_ready) n_stall++;
  end

  task automatic axi_write(logic [7:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d; s_wstrb = 4'hF; s_bready = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    resp = s_bresp;
    @(negedge clk) s_bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a; s_rready = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk) s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk) s_rready = 0;
  endtask

  // One host access; waits while the port is held off.
  task automatic host(logic we, region_e r, int a, logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    h_valid = 1; h_we = we; h_region = r; h_addr = L'(a); h_wdata = d;
    do @(posedge clk); while (!h_ready);
    @(negedge clk);
    h_valid = 0;
    q = h_rdata;
  endtask

  task automatic expect_eq(longint unsigned got, longint unsigned want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL N=%0d B=%0d %s got %0d want %0d", N, B, what, got, want);
    end
  endtask

  initial begin
    longint unsigned pp, w;
    longint unsigned x[], y[];
    logic [31:0] d;
    logic [1:0] r;
    checks = 0; failures = 0; finished = 0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    h_valid = 0; h_we = 0; h_region = REG_INPUT; h_addr = 0; h_wdata = 0;
    pp = P_DEFAULT;
    w = root_of_unity(N, pp);
    @(posedge rst_n);
    axi_read(ADDR_CONFIG, d);
    expect_eq(d, {16'd0, 8'(B), 8'(L)}, "CONFIG");
    axi_write(ADDR_MODULUS, 32'(pp), r);
    for (int e = 0; e < N / 2; e++) begin
      longint unsigned t;
      t = powm(w, e, pp);
      host(1, REG_TW, e, 32'(t), d);
      host(1, REG_TWH, e, 32'(shoup(t, pp)), d);
    end
    for (int run = 0; run < RUNS; run++) begin
      x = new[N];
      foreach (x[i]) x[i] = (run == 0 && i % 5 == 0) ? pp - 1 : rand_res(pp);
      if (N <= 4096) dft(x, w, pp, y);
      else fast_ntt(x, w, pp, y);
      for (int i = 0; i < N; i++) host(1, REG_INPUT, i, 32'(x[i]), d);
      new_run = 1;
      axi_write(ADDR_CTRL, 1, r);
      expect_eq(r, RESP_OKAY, "start accepted");
      // while it runs: a refused second start and a held-off host read
      axi_write(ADDR_CTRL, 1, r);
      expect_eq(r, RESP_SLVERR, "start while busy refused");
      if (r == RESP_SLVERR) n_reject++;
      host(0, REG_RESULT, 0, 0, d);
      expect_eq(irq, 1, "host access completes only after the transform");
      axi_read(ADDR_STATUS, d);
      expect_eq(d, {29'd0, 1'(L % 2), 2'b10}, "STATUS after run");
      axi_read(ADDR_CYCLES, d);
      expect_eq(d, EXP_CYC, "CYCLES");
      if (PAPER_CYC != 0) begin
        checks++;
        if (d > PAPER_CYC) begin
          failures++;
          $display("FAIL N=%0d B=%0d %0d cycles exceed the paper's %0d", N, B, d, PAPER_CYC);
        end else
          $display("N=%0d B=%0d: %0d cycles, paper's latency at 196 MHz is %0d cycles", N, B, d, PAPER_CYC);
      end
      for (int k = 0; k < N; k++) begin
        host(0, REG_RESULT, k, 0, d);
        expect_eq(d, y[k], $sformatf("X[%0d]", k));
      end
    end
    $display("mechanisms N=%0d B=%0d: array swaps %0d, drains %0d, overlapped read/write cycles %0d, host stalls %0d, refused starts %0d",
             N, B, n_swap, n_drain, n_overlap, n_stall, n_reject);
    expect_eq(n_swap, RUNS * (L - 1), "array swaps");
    expect_eq(n_drain, RUNS * L, "drains");
    checks += 3;
    if (n_overlap == 0) begin failures++; $display("FAIL no pipelined read/write overlap"); end
    if (n_stall == 0) begin failures++; $display("FAIL no host stall"); end
    if (n_reject == 0) begin failures++; $display("FAIL no refused start"); end
    finished = 1;
  end
endmodule
