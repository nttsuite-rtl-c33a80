// pnc_pease_ntt: the Pease no-copy (Pease_nc) NTT engine ("PeaseNTT").
//
// Function: an N-point cyclic NTT, X[k] = sum_n x[n] w^(nk) mod p, of a vector
// that the host stored in bit-reversed order in array 0, using B butterfly
// cores in parallel.
//
// Schedule (constant geometry): stage s = 0 .. L-1 computes, for every
// r < N/2, with k = L-1-s and e = (r >> k) << k,
//   y[r]       = x[2r] + w^e x[2r+1]
//   y[r + N/2] = x[2r] - w^e x[2r+1]
// reading array s%2 and writing the other one; the arrays then swap roles
// (no copy). The result ends in array L%2 (`res_sel`).
//
// Memory layout: each array is split into B interleaved banks (bank = index
// mod B, row = index / B), the paper's interleave = B partition. Row group c
// covers r = cB .. cB+B-1. Its 2B operands x[2cB .. 2cB+2B-1] are rows 2c
// (port 0) and 2c+1 (port 1) of every bank of the source array; its outputs
// y[cB+j] and y[N/2+cB+j] are rows c (port 0) and RPS+c (port 1) of bank j
// of the destination array. Every bank port does one access per cycle, so
// with dual-port banks the engine runs at one row group per cycle. The
// operand-to-core routing is fixed wiring: core j takes operands 2j and 2j+1.
//
// Twiddles: core j reads its own copy of the table w^e (and the Shoup
// quotients floor(w^e 2^W / p)), e < N/2, from port A of its twiddle RAMs.
//
// Timing: reads are issued in the cycle `issue` is high, data returns one
// cycle later into the butterflies, results are written DRAIN_CYC cycles
// after issue. A transform takes L * (N/(2B) + DRAIN_CYC) cycles.
// What follows the paper: the Pease schedule, interleave = B banks on both
// arrays, dual-port RAM, II = 1, array swap, HEAX-style reduction, one
// twiddle memory per core (Fig. 5 shows one per core for four cores).
// This design's own choices: the exact twiddle index formula, pipeline depths,
// and the drain between stages.
module pnc_pease_ntt #(
  parameter int unsigned N = 4096,
  parameter int unsigned B = 16,
  parameter int unsigned W = pnc_pkg::W,
  localparam int unsigned L   = $clog2(N),
  localparam int unsigned RPS = N / (2 * B),
  localparam int unsigned RAW = $clog2(N / B),
  localparam int unsigned TAW = $clog2(N / 2)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic [W-1:0]                         p,
  output logic                                 busy,
  output logic                                 done,
  output logic                                 res_sel,
  // vector memories: [array][bank][port]
  output logic [1:0][B-1:0][1:0]               v_en,
  output logic [1:0][B-1:0][1:0]               v_we,
  output logic [1:0][B-1:0][1:0][RAW-1:0]      v_addr,
  output logic [1:0][B-1:0][1:0][W-1:0]        v_wdata,
  input  logic [1:0][B-1:0][1:0][W-1:0]        v_rdata,
  // twiddle memories, port A of each core's copy
  output logic [B-1:0]                         tw_en,
  output logic [B-1:0][TAW-1:0]                tw_addr,
  input  logic [B-1:0][W-1:0]                  tw_rdata,
  input  logic [B-1:0][W-1:0]                  twh_rdata
);

  import pnc_pkg::*;

  localparam int unsigned GW = (RPS > 1) ? $clog2(RPS) : 1;
  localparam int unsigned SW = $clog2(L + 1);
  localparam int unsigned LB = $clog2(B);

  // ---------------- sequencer ----------------
  logic          issue;
  logic [SW-1:0] stage;
  logic [GW-1:0] group;

  pnc_ctrl #(.N(N), .B(B)) u_ctrl (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .busy  (busy),
    .done  (done),
    .issue (issue),
    .stage (stage),
    .group (group)
  );

  assign res_sel = 1'(L % 2);

  logic src;  // array read by the current stage
  assign src = stage[0];

  // ---------------- read side ----------------
  // Twiddle index of core j: r = group*B + j with its low k bits cleared.
  always_comb begin
    for (int unsigned j = 0; j < B; j++) begin
      logic [TAW-1:0] r;
      logic [SW-1:0]  k;
      r          = TAW'({group, LB'(j)});
      k          = SW'(L - 1) - stage;
      tw_en[j]   = issue;
      tw_addr[j] = (r >> k) << k;
    end
  end

  // Pipeline registers: read valid, source array, and the write-back row
  // group and destination array, delayed to meet the butterfly outputs.
  logic            rd_valid_q;
  logic            rd_src_q;
  logic [GW-1:0]   grp_dly [DRAIN_CYC];
  logic            dst_dly [DRAIN_CYC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid_q <= 1'b0;
      rd_src_q   <= 1'b0;
      for (int unsigned i = 0; i < DRAIN_CYC; i++) begin
        grp_dly[i] <= '0;
        dst_dly[i] <= 1'b0;
      end
    end else begin
      rd_valid_q <= issue;
      rd_src_q   <= src;
      grp_dly[0] <= group;
      dst_dly[0] <= ~src;
      for (int unsigned i = 1; i < DRAIN_CYC; i++) begin
        grp_dly[i] <= grp_dly[i-1];
        dst_dly[i] <= dst_dly[i-1];
      end
    end
  end

  // ---------------- butterfly cores ----------------
  logic [B-1:0]        bf_valid;
  logic [B-1:0][W-1:0] bf_y0, bf_y1;

  for (genvar j = 0; j < B; j++) begin : g_core
    // operand m of the row group sits in bank m % B, port m / B
    localparam int unsigned MA = 2 * j;
    localparam int unsigned MB = 2 * j + 1;
    logic [W-1:0] op_a, op_b;
    assign op_a = v_rdata[rd_src_q][MA % B][MA / B];
    assign op_b = v_rdata[rd_src_q][MB % B][MB / B];

    pnc_butterfly #(.W(W)) u_bf (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (rd_valid_q),
      .a         (op_a),
      .b         (op_b),
      .w         (tw_rdata[j]),
      .wh        (twh_rdata[j]),
      .p         (p),
      .out_valid (bf_valid[j]),
      .y0        (bf_y0[j]),
      .y1        (bf_y1[j])
    );
  end

  // ---------------- memory ports ----------------
  logic          wr_valid;
  logic          wr_dst;
  logic [GW-1:0] wr_grp;
  assign wr_valid = bf_valid[0];
  assign wr_dst   = dst_dly[DRAIN_CYC-1];
  assign wr_grp   = grp_dly[DRAIN_CYC-1];

  always_comb begin
    for (int unsigned a = 0; a < 2; a++) begin
      for (int unsigned k = 0; k < B; k++) begin
        v_en[a][k]    = '0;
        v_we[a][k]    = '0;
        v_addr[a][k]  = '0;
        v_wdata[a][k] = '0;
        if (issue && src == 1'(a)) begin
          v_en[a][k]      = 2'b11;
          v_addr[a][k][0] = RAW'({group, 1'b0});
          v_addr[a][k][1] = RAW'({group, 1'b1});
        end
        if (wr_valid && wr_dst == 1'(a)) begin
          v_en[a][k]       = 2'b11;
          v_we[a][k]       = 2'b11;
          v_addr[a][k][0]  = RAW'(wr_grp);
          v_addr[a][k][1]  = RAW'(RPS) + RAW'(wr_grp);
          v_wdata[a][k][0] = bf_y0[k];
          v_wdata[a][k][1] = bf_y1[k];
        end
      end
    end
  end

  // A stage never reads the array it writes.
  a_no_rw_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (issue && wr_valid) |-> (src != wr_dst));
  a_cores_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (bf_valid == '0) || (bf_valid == '1));
  initial begin
    a_params: assert (B >= 2 && (1 << LB) == B && (1 << L) == N && N >= 2 * B)
      else $error("pnc_pease_ntt: N and B must be powers of two with N >= 2B, B >= 2");
  end

endmodule
