// pnc_axil_regs: AXI4-Lite control and status registers ("axi_lit_0").
//
// The host starts a transform, sets the prime and polls for completion
// through these registers (map in pnc_pkg):
//   0x00 CTRL     write bit0 = 1: start (only while idle)
//   0x04 STATUS   bit0 busy, bit1 done (sticky, cleared by start),
//                 bit2 array holding the result
//   0x08 MODULUS  prime p, read/write; writes while busy are refused
//   0x0C CYCLES   clock cycles the last (or running) transform took
//   0x10 CONFIG   [7:0] log2 N, [15:8] number of butterfly cores
// Registers are word aligned: address bits [1:0] are ignored (Verilator
// notes them as unused). Other addresses and refused writes answer SLVERR. `irq` follows the sticky
// done bit.
//
// Protocol: a write is taken when AWVALID and WVALID are both high and no
// response is pending (AWREADY = WREADY in that cycle); BVALID follows one
// cycle later and is held until BREADY. A read is taken when ARVALID is high
// and no read data is pending; RVALID follows one cycle later and is held
// until RREADY. The paper names this block only; the register map and
// handshake timing are this design's own choices.
module pnc_axil_regs #(
  parameter int unsigned N = 4096,
  parameter int unsigned B = 16,
  parameter int unsigned W = pnc_pkg::W
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite slave
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [7:0]   s_awaddr,
  input  logic         s_wvalid,
  output logic         s_wready,
  input  logic [31:0]  s_wdata,
  input  logic [3:0]   s_wstrb,
  output logic         s_bvalid,
  input  logic         s_bready,
  output logic [1:0]   s_bresp,
  input  logic         s_arvalid,
  output logic         s_arready,
  input  logic [7:0]   s_araddr,
  output logic         s_rvalid,
  input  logic         s_rready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  // engine side
  output logic         start,
  output logic [W-1:0] modulus,
  input  logic         busy,
  input  logic         done,
  input  logic         res_sel,
  output logic         irq
);

  import pnc_pkg::*;

  logic        done_q;
  logic [31:0] cycles;
  logic        wr_acc, rd_acc;
  logic [7:0]  awa, ara;

  assign wr_acc    = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_acc;
  assign s_wready  = wr_acc;
  assign rd_acc    = s_arvalid && !s_rvalid;
  assign s_arready = !s_rvalid;
  assign awa       = {s_awaddr[7:2], 2'b00};
  assign ara       = {s_araddr[7:2], 2'b00};
  assign irq       = done_q;

  // byte-lane merge of a write into a 32-bit register
  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int unsigned i = 0; i < 4; i++) r[8*i +: 8] = strb[i] ? d[8*i +: 8] : old[8*i +: 8];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_bresp  <= RESP_OKAY;
      start    <= 1'b0;
      modulus  <= '0;
      done_q   <= 1'b0;
      cycles   <= '0;
    end else begin
      start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (done) done_q <= 1'b1;
      if (busy) cycles <= cycles + 1'b1;
      if (wr_acc) begin
        s_bvalid <= 1'b1;
        s_bresp  <= RESP_OKAY;
        unique case (awa)
          ADDR_CTRL: begin
            if (s_wstrb[0] && s_wdata[0]) begin
              if (busy || start) s_bresp <= RESP_SLVERR;
              else begin
                start  <= 1'b1;
                done_q <= 1'b0;
                cycles <= '0;
              end
            end
          end
          ADDR_MODULUS: begin
            if (busy || start) s_bresp <= RESP_SLVERR;
            else modulus <= W'(merge(32'(modulus), s_wdata, s_wstrb));
          end
          default: s_bresp <= RESP_SLVERR;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= RESP_OKAY;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_acc) begin
        s_rvalid <= 1'b1;
        s_rresp  <= RESP_OKAY;
        unique case (ara)
          ADDR_CTRL:    s_rdata <= '0;
          ADDR_STATUS:  s_rdata <= {29'd0, res_sel, done_q, busy | start};
          ADDR_MODULUS: s_rdata <= 32'(modulus);
          ADDR_CYCLES:  s_rdata <= cycles;
          ADDR_CONFIG:  s_rdata <= {16'd0, 8'(B), 8'($clog2(N))};
          default: begin
            s_rdata <= '0;
            s_rresp <= RESP_SLVERR;
          end
        endcase
      end
    end
  end

  // AXI rules on the master's side: a raised VALID stays up until accepted.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_awvalid && !s_awready) |=> s_awvalid);
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_wvalid && !s_wready) |=> s_wvalid);
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_arvalid && !s_arready) |=> s_arvalid);
  // and on ours: a response stays up until taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_bvalid && !s_bready) |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_rvalid && !s_rready) |=> (s_rvalid && $stable(s_rdata)));

endmodule
