// pnc_mod_addsub: modular addition and subtraction of two residues.
//
// For a, b < p the sum lies in [0, 2p) and the difference in (-p, p), so each
// needs one add or subtract and one conditional correction instead of a
// division: sum = a+b, minus p when a+b >= p; diff = a-b, plus p when it
// borrowed. This is the paper's modulo_add; its listing tests "result > m",
// this block uses ">= p" so that the result is always below p.
// Purely combinational; both inputs must already be below p. W+1-bit
// intermediates keep the sum exact for moduli up to 2^W - 1.
module pnc_mod_addsub #(
  parameter int unsigned W = pnc_pkg::W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] p,
  output logic [W-1:0] sum,
  output logic [W-1:0] diff
);

  logic [W:0]   s_raw, d_raw;
  logic [W-1:0] s_red;

  always_comb begin
    s_raw = {1'b0, a} + {1'b0, b};
    s_red = W'(s_raw - {1'b0, p});
    sum   = (s_raw >= {1'b0, p}) ? s_red : s_raw[W-1:0];
    d_raw = {1'b0, a} - {1'b0, b};
    // d_raw[W] is the borrow: the difference went negative, add p back.
    diff  = d_raw[W] ? (d_raw[W-1:0] + p) : d_raw[W-1:0];
  end

endmodule
