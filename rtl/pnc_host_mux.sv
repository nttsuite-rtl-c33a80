// pnc_host_mux: host access to the vector and twiddle memories.
//
// The host (through a memory-mapped bridge) loads the input vector and the
// twiddle tables before a transform and reads the result after it. This block
// turns one host word access into a bank access:
//   REG_INPUT  index i -> array 0 at bit_reverse(i): the Pease schedule wants
//              its input in bit-reversed order, so the reordering is done on
//              the way in and costs no pass over the data.
//   REG_RESULT index i -> array res_sel at i (natural order).
//   REG_TW / REG_TWH index e < N/2 -> written to every core's copy of the
//              table (port B), read back from core 0's copy.
// In both arrays index i lives in bank i mod B at row i / B.
// While the engine is busy it owns port 0 of every vector bank and the host is
// held off (h_ready low); when idle the host drives port 0. Port 1 and the
// twiddle port A belong to the engine only.
//
// Timing: an access is taken in a cycle with h_valid && h_ready; read data
// returns with h_rvalid one cycle later. Accesses outside a table are ignored
// and read as zero. The paper shows AXI BRAM controllers on the memories but
// gives no address map; the map and the bit reversal on load are this
// design's own choices.
module pnc_host_mux #(
  parameter int unsigned N = 4096,
  parameter int unsigned B = 16,
  parameter int unsigned W = pnc_pkg::W,
  localparam int unsigned L   = $clog2(N),
  localparam int unsigned RAW = $clog2(N / B),
  localparam int unsigned TAW = $clog2(N / 2)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            busy,
  input  logic                            res_sel,
  // host word port
  input  logic                            h_valid,
  output logic                            h_ready,
  input  logic                            h_we,
  input  pnc_pkg::region_e                h_region,
  input  logic [L-1:0]                    h_addr,
  input  logic [W-1:0]                    h_wdata,
  output logic                            h_rvalid,
  output logic [W-1:0]                    h_rdata,
  // vector ports from the engine
  input  logic [1:0][B-1:0][1:0]          e_en,
  input  logic [1:0][B-1:0][1:0]          e_we,
  input  logic [1:0][B-1:0][1:0][RAW-1:0] e_addr,
  input  logic [1:0][B-1:0][1:0][W-1:0]   e_wdata,
  // vector ports to the memories
  output logic [1:0][B-1:0][1:0]          m_en,
  output logic [1:0][B-1:0][1:0]          m_we,
  output logic [1:0][B-1:0][1:0][RAW-1:0] m_addr,
  output logic [1:0][B-1:0][1:0][W-1:0]   m_wdata,
  input  logic [1:0][B-1:0][1:0][W-1:0]   m_rdata,
  // twiddle tables, port B of every copy
  output logic [B-1:0]                    t_en,
  output logic [B-1:0]                    t_we,
  output logic [B-1:0]                    th_en,
  output logic [B-1:0]                    th_we,
  output logic [TAW-1:0]                  t_addr,
  output logic [W-1:0]                    t_wdata,
  input  logic [W-1:0]                    t_rdata,
  input  logic [W-1:0]                    th_rdata
);

  import pnc_pkg::*;

  localparam int unsigned LB = $clog2(B);

  logic          acc;
  logic [L-1:0]  idx;
  logic          arr;
  logic [LB-1:0] bank;
  logic [RAW-1:0] row;
  logic          in_table;

  assign h_ready = !busy;
  assign acc     = h_valid && h_ready;

  always_comb begin
    idx      = (h_region == REG_INPUT) ? L'(bit_reverse(32'(h_addr), L)) : h_addr;
    arr      = (h_region == REG_INPUT) ? 1'b0 : res_sel;
    bank     = idx[LB-1:0];
    row      = idx[L-1:LB];
    in_table = (h_addr[L-1] == 1'b0);  // twiddle index below N/2
  end

  // vector ports: engine, or host on port 0 when idle
  always_comb begin
    m_en    = e_en;
    m_we    = e_we;
    m_addr  = e_addr;
    m_wdata = e_wdata;
    if (acc && (h_region == REG_INPUT || h_region == REG_RESULT)) begin
      m_en[arr][bank][0]    = 1'b1;
      m_we[arr][bank][0]    = h_we;
      m_addr[arr][bank][0]  = row;
      m_wdata[arr][bank][0] = h_wdata;
    end
  end

  // twiddle tables: broadcast writes, read copy 0
  always_comb begin
    t_addr  = h_addr[TAW-1:0];
    t_wdata = h_wdata;
    t_en    = '0;
    t_we    = '0;
    th_en   = '0;
    th_we   = '0;
    if (acc && in_table && h_region == REG_TW) begin
      t_en  = h_we ? '1 : B'(1);
      t_we  = h_we ? '1 : '0;
    end
    if (acc && in_table && h_region == REG_TWH) begin
      th_en = h_we ? '1 : B'(1);
      th_we = h_we ? '1 : '0;
    end
  end

  // read return
  region_e       rd_region;
  logic          rd_arr;
  logic [LB-1:0] rd_bank;
  logic          rd_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_rvalid  <= 1'b0;
      rd_region <= REG_INPUT;
      rd_arr    <= 1'b0;
      rd_bank   <= '0;
      rd_ok     <= 1'b0;
    end else begin
      h_rvalid  <= acc && !h_we;
      rd_region <= h_region;
      rd_arr    <= arr;
      rd_bank   <= bank;
      rd_ok     <= (h_region == REG_INPUT || h_region == REG_RESULT) || in_table;
    end
  end

  always_comb begin
    unique case (rd_region)
      REG_TW:  h_rdata = rd_ok ? t_rdata : '0;
      REG_TWH: h_rdata = rd_ok ? th_rdata : '0;
      default: h_rdata = m_rdata[rd_arr][rd_bank][0];
    endcase
  end

  a_host_waits_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !acc);

endmodule
