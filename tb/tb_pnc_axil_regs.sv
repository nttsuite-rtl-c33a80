// tb_pnc_axil_regs: AXI4-Lite register block driven by a simple master with
// random valid/ready delays. Checks the modulus register with byte strobes,
// the start pulse, the sticky done bit and irq, the busy cycle counter,
// SLVERR for unmapped addresses and for start or modulus writes while busy,
// the CONFIG word, and that responses are held until accepted.
module tb_pnc_axil_regs;
  import pnc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic start, busy, done, res_sel, irq;
  logic [31:0] modulus;
  int checks = 0, failures = 0, starts = 0;

  pnc_axil_regs #(.N(4096), .B(16), .W(32)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(logic [7:0] a, logic [31:0] d, logic [3:0] strb, output logic [1:0] resp);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d; s_wstrb = strb;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
    @(negedge clk) s_bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    do @(posedge clk); while (!s_arready);
    @(negedge clk) s_arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata; resp = s_rresp;
    @(negedge clk) s_rready = 0;
  endtask

  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s got %h want %h", what, got, want);
    end
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0] r;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    busy = 0; done = 0; res_sel = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // modulus with strobes
    axi_write(ADDR_MODULUS, 32'hFFF0_0001, 4'hF, r); expect_eq(32'(r), RESP_OKAY, "mod resp");
    expect_eq(modulus, 32'hFFF0_0001, "modulus out");
    axi_write(ADDR_MODULUS, 32'h1234_5678, 4'b0101, r);
    axi_read(ADDR_MODULUS, d, r); expect_eq(d, 32'hFF34_0078, "modulus strobes");
    axi_read(ADDR_CONFIG, d, r); expect_eq(d, 32'h0000_100C, "config");
    axi_read(8'h40, d, r); expect_eq(32'(r), RESP_SLVERR, "unmapped read");
    axi_write(8'h44, 0, 4'hF, r); expect_eq(32'(r), RESP_SLVERR, "unmapped write");
    // start, then a busy phase of 37 cycles, done
    axi_write(ADDR_CTRL, 1, 4'hF, r); expect_eq(32'(r), RESP_OKAY, "start resp");
    expect_eq(starts, 1, "one start pulse");
    @(negedge clk) busy = 1;
    axi_read(ADDR_STATUS, d, r); expect_eq(d & 3, 1, "status busy");
    axi_write(ADDR_CTRL, 1, 4'hF, r); expect_eq(32'(r), RESP_SLVERR, "start while busy");
    axi_write(ADDR_MODULUS, 7, 4'hF, r); expect_eq(32'(r), RESP_SLVERR, "modulus while busy");
    expect_eq(starts, 1, "no second start");
    while (dut.cycles < 37) @(negedge clk);
    busy = 0; done = 1; res_sel = 1;
    @(negedge clk) done = 0;
    expect_eq(32'(irq), 1, "irq");
    axi_read(ADDR_STATUS, d, r); expect_eq(d, 32'h6, "status done");
    axi_read(ADDR_CYCLES, d, r); expect_eq(d, 37, "cycles");
    axi_read(ADDR_MODULUS, d, r); expect_eq(d, 32'hFF34_0078, "modulus kept");
    axi_write(ADDR_CTRL, 1, 4'hF, r);
    expect_eq(32'(irq), 0, "done cleared by start");
    expect_eq(starts, 2, "second start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
