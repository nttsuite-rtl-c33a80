// pnc_butterfly: one constant-geometry NTT butterfly core.
//
// Given the pair (a, b) = (x[2r], x[2r+1]) of a Pease stage and the twiddle
// w with its Shoup quotient wh, produces
//   y0 = (a + w*b) mod p   (written to y[r])
//   y1 = (a - w*b) mod p   (written to y[r + N/2])
// The product goes through pnc_mod_mul, then one pnc_mod_addsub stage, so the
// outputs appear BFLY_LAT = MUL_LAT + 1 cycles after the inputs. It accepts a
// new pair every cycle (initiation interval 1, as the paper pipelines the
// inner loop). in_valid is carried alongside the data as out_valid; the
// butterfly itself never stalls.
module pnc_butterfly #(
  parameter int unsigned W = pnc_pkg::W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] w,
  input  logic [W-1:0] wh,
  input  logic [W-1:0] p,
  output logic         out_valid,
  output logic [W-1:0] y0,
  output logic [W-1:0] y1
);

  localparam int unsigned ML = pnc_pkg::MUL_LAT;

  logic [W-1:0] a_dly [ML];
  logic [ML-1:0] v_dly;
  logic [W-1:0] wb, sum, diff;

  pnc_mod_mul #(.W(W)) u_mul (
    .clk (clk),
    .x   (b),
    .y   (w),
    .yh  (wh),
    .p   (p),
    .z   (wb)
  );

  pnc_mod_addsub #(.W(W)) u_addsub (
    .a    (a_dly[ML-1]),
    .b    (wb),
    .p    (p),
    .sum  (sum),
    .diff (diff)
  );

  // Delay a to meet the product.
  always_ff @(posedge clk) begin
    a_dly[0] <= a;
    for (int unsigned i = 1; i < ML; i++) a_dly[i] <= a_dly[i-1];
    y0 <= sum;
    y1 <= diff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_dly     <= '0;
      out_valid <= 1'b0;
    end else begin
      v_dly     <= {v_dly[ML-2:0], in_valid};
      out_valid <= v_dly[ML-1];
    end
  end

endmodule
