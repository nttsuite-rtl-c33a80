// pnc_dpram: true dual-port block RAM.
//
// Two independent ports, each of which reads or writes one word per cycle.
// The paper configures every vector and twiddle array as dual-port RAM so
// that a bank can serve two butterfly operands (or two results) in one cycle.
// Reads are synchronous with one cycle of latency and return the old contents
// when the same port writes (read-first). The two ports must not write the
// same address in the same cycle; an assertion checks it. No reset: the
// contents are loaded by the host before use. Depth and width are parameters;
// the defaults are one vector bank of the 4096-point, 16-core configuration.
module pnc_dpram #(
  parameter int unsigned DW    = pnc_pkg::W,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  // port A
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  // port B
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

  // Both ports writing one address in one cycle has no defined result.
  a_no_write_collision: assert property (
    @(posedge clk) !(a_en && a_we && b_en && b_we && a_addr == b_addr))
    else $error("pnc_dpram: both ports write address %0d", a_addr);

endmodule
