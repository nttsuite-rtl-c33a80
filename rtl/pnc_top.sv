// pnc_top: Pease no-copy NTT accelerator.
//
// An N-point number theoretic transform modulo a runtime prime p, computed
// by B parallel butterfly cores with the constant-geometry (Pease) schedule
// on two ping-pong vector arrays that swap roles every stage. This top holds:
//   u_regs     AXI4-Lite control/status registers (start, modulus, done)
//   u_ntt      the engine: sequencer, B butterfly cores, bank routing
//   u_host     host word port onto the memories
//   g_vec      2 arrays x B dual-port banks of N/B words (interleave = B)
//   g_tw       per core, a dual-port twiddle table and quotient table of
//              N/2 words each
// Defaults follow the paper's main configuration: N = 4096 points, 16
// butterfly cores, 32-bit words. With B = 4 the memory set is the one of the
// paper's block diagram: 8 vector banks, 4 twiddle and 4 quotient tables.
//
// Use: write p to MODULUS; write the input through the host port (region
// REG_INPUT, natural index; it is stored bit-reversed), the twiddles w^e and
// quotients floor(w^e 2^W / p) for e < N/2 (regions REG_TW, REG_TWH), where w
// is a primitive N-th root of unity mod p; write 1 to CTRL; wait for irq or
// STATUS.done; read X[k] from region REG_RESULT.
// Timing: a transform takes L * (N/(2B) + DRAIN_CYC) cycles, 1596 cycles at
// the defaults. The host port is held off (h_ready low) while it runs.
// The host reads the twiddle tables back from core 0's copy only, so the
// port-B read data of the other copies is left unused (a lint note).
// rst_n also appears in assertion disable conditions, which Verilator
// reports as a synchronous use of an asynchronous reset.
// The PCIe bridge, the AXI interconnect, the AXI BRAM controllers and the
// clock buffer of a complete board system are outside this module; the AXI4-
// Lite and host word ports are where they connect.
module pnc_top #(
  parameter int unsigned N = 4096,
  parameter int unsigned B = 16,
  parameter int unsigned W = pnc_pkg::W,
  localparam int unsigned L = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  // AXI4-Lite control
  input  logic             s_awvalid,
  output logic             s_awready,
  input  logic [7:0]       s_awaddr,
  input  logic             s_wvalid,
  output logic             s_wready,
  input  logic [31:0]      s_wdata,
  input  logic [3:0]       s_wstrb,
  output logic             s_bvalid,
  input  logic             s_bready,
  output logic [1:0]       s_bresp,
  input  logic             s_arvalid,
  output logic             s_arready,
  input  logic [7:0]       s_araddr,
  output logic             s_rvalid,
  input  logic             s_rready,
  output logic [31:0]      s_rdata,
  output logic [1:0]       s_rresp,
  // host word port to the memories
  input  logic             h_valid,
  output logic             h_ready,
  input  logic             h_we,
  input  pnc_pkg::region_e h_region,
  input  logic [L-1:0]     h_addr,
  input  logic [W-1:0]     h_wdata,
  output logic             h_rvalid,
  output logic [W-1:0]     h_rdata,
  // completion
  output logic             irq
);

  localparam int unsigned RAW = $clog2(N / B);
  localparam int unsigned TAW = $clog2(N / 2);

  logic         start, busy, done, res_sel;
  logic [W-1:0] modulus;

  pnc_axil_regs #(.N(N), .B(B), .W(W)) u_regs (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_wstrb,
    .s_bvalid, .s_bready, .s_bresp,
    .s_arvalid, .s_arready, .s_araddr, .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .start, .modulus, .busy, .done, .res_sel, .irq
  );

  logic [1:0][B-1:0][1:0]          e_en, e_we, m_en, m_we;
  logic [1:0][B-1:0][1:0][RAW-1:0] e_addr, m_addr;
  logic [1:0][B-1:0][1:0][W-1:0]   e_wdata, m_wdata, m_rdata;
  logic [B-1:0]                    tw_en;
  logic [B-1:0][TAW-1:0]           tw_addr;
  logic [B-1:0][W-1:0]             tw_rdata, twh_rdata, twb_rdata, twhb_rdata;
  logic [B-1:0]                    t_en, t_we, th_en, th_we;
  logic [TAW-1:0]                  t_addr;
  logic [W-1:0]                    t_wdata;

  pnc_pease_ntt #(.N(N), .B(B), .W(W)) u_ntt (
    .clk, .rst_n, .start, .p(modulus), .busy, .done, .res_sel,
    .v_en(e_en), .v_we(e_we), .v_addr(e_addr), .v_wdata(e_wdata), .v_rdata(m_rdata),
    .tw_en, .tw_addr, .tw_rdata, .twh_rdata
  );

  pnc_host_mux #(.N(N), .B(B), .W(W)) u_host (
    .clk, .rst_n, .busy, .res_sel,
    .h_valid, .h_ready, .h_we, .h_region, .h_addr, .h_wdata, .h_rvalid, .h_rdata,
    .e_en, .e_we, .e_addr, .e_wdata,
    .m_en, .m_we, .m_addr, .m_wdata, .m_rdata,
    .t_en, .t_we, .th_en, .th_we, .t_addr, .t_wdata,
    .t_rdata(twb_rdata[0]), .th_rdata(twhb_rdata[0])
  );

  for (genvar a = 0; a < 2; a++) begin : g_vec
    for (genvar k = 0; k < B; k++) begin : g_bank
      pnc_dpram #(.DW(W), .DEPTH(N / B)) u_bank (
        .clk,
        .a_en(m_en[a][k][0]), .a_we(m_we[a][k][0]), .a_addr(m_addr[a][k][0]),
        .a_wdata(m_wdata[a][k][0]), .a_rdata(m_rdata[a][k][0]),
        .b_en(m_en[a][k][1]), .b_we(m_we[a][k][1]), .b_addr(m_addr[a][k][1]),
        .b_wdata(m_wdata[a][k][1]), .b_rdata(m_rdata[a][k][1])
      );
    end
  end

  for (genvar j = 0; j < B; j++) begin : g_tw
    pnc_dpram #(.DW(W), .DEPTH(N / 2)) u_twiddle (
      .clk,
      .a_en(tw_en[j]), .a_we(1'b0), .a_addr(tw_addr[j]), .a_wdata('0), .a_rdata(tw_rdata[j]),
      .b_en(t_en[j]), .b_we(t_we[j]), .b_addr(t_addr), .b_wdata(t_wdata), .b_rdata(twb_rdata[j])
    );
    pnc_dpram #(.DW(W), .DEPTH(N / 2)) u_twiddle_h (
      .clk,
      .a_en(tw_en[j]), .a_we(1'b0), .a_addr(tw_addr[j]), .a_wdata('0), .a_rdata(twh_rdata[j]),
      .b_en(th_en[j]), .b_we(th_we[j]), .b_addr(t_addr), .b_wdata(t_wdata), .b_rdata(twhb_rdata[j])
    );
  end

endmodule
