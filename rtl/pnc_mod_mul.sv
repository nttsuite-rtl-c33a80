// pnc_mod_mul: pipelined modular multiplication by a twiddle factor.
//
// Computes z = x * y mod p with the precomputed-quotient method the paper takes
// from HEAX: for every twiddle y the host also supplies yh = floor(y * 2^W / p).
// Then q = (x * yh) >> W underestimates x*y/p by less than 2, so
// x*y - q*p lies in [0, 2p) and only its low W+1 bits are needed; one
// conditional subtraction finishes the reduction. No divider is used.
// The paper's listing compares "z <= 0" before correcting; this block uses the
// standard test z >= p, which the bound above calls for.
//
// Timing: fully pipelined, one new operand per cycle, result MUL_LAT = 3
// cycles after the operands are presented.
//   stage 1: x*y (low W+1 bits) and q = high half of x*yh
//   stage 2: q*p (low W+1 bits)
//   stage 3: subtract and correct
// p is a configuration input and must be stable while operands flow.
module pnc_mod_mul #(
  parameter int unsigned W = pnc_pkg::W
) (
  input  logic         clk,
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] yh,
  input  logic [W-1:0] p,
  output logic [W-1:0] z
);

  localparam int unsigned W1 = W + 1;
  localparam int unsigned W2 = 2 * W;

  // Only the low W+1 bits of x*y and q*p, and the high W bits of x*yh, are
  // needed; the casts below keep just those.
  logic [W:0]     prod_xy, prod_qp;
  logic [W-1:0]   prod_xyh_hi;
  logic [W:0]     za_s1, za_s2, zb_s2, diff;
  logic [W-1:0]   q_s1;

  always_comb begin
    prod_xy     = W1'(W2'(x) * W2'(y));
    prod_xyh_hi = W'((W2'(x) * W2'(yh)) >> W);
    prod_qp     = W1'(W2'(q_s1) * W2'(p));
    diff        = za_s2 - zb_s2;
  end

  always_ff @(posedge clk) begin
    // stage 1
    za_s1 <= prod_xy;
    q_s1  <= prod_xyh_hi;
    // stage 2
    za_s2 <= za_s1;
    zb_s2 <= prod_qp;
    // stage 3
    z     <= (diff >= {1'b0, p}) ? W'(diff - {1'b0, p}) : diff[W-1:0];
  end

endmodule
