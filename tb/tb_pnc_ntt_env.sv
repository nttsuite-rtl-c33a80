// tb_pnc_ntt_env: one pnc_pease_ntt of size N, B with a behavioural model
// of its dual-port memories (one-cycle read latency). It loads random
// vectors in bit-reversed order and the twiddle tables, runs RUNS transforms,
// and checks every output word against a direct O(N^2) transform, the array
// the result ends in, and the cycle count L * (N/(2B) + DRAIN_CYC).
module tb_pnc_ntt_env #(
  parameter int unsigned N    = 64,
  parameter int unsigned B    = 4,
  parameter int unsigned RUNS = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  import tb_pnc_util_pkg::*;

  localparam int unsigned L   = $clog2(N);
  localparam int unsigned RAW = $clog2(N / B);
  localparam int unsigned TAW = $clog2(N / 2);
  localparam int unsigned EXP_CYC = L * (N / (2 * B) + pnc_pkg::DRAIN_CYC);

  logic start, busy, done, res_sel;
  logic [31:0] p;
  logic [1:0][B-1:0][1:0]            v_en, v_we;
  logic [1:0][B-1:0][1:0][RAW-1:0]   v_addr;
  logic [1:0][B-1:0][1:0][31:0]      v_wdata, v_rdata;
  logic [B-1:0]                      tw_en;
  logic [B-1:0][TAW-1:0]             tw_addr;
  logic [B-1:0][31:0]                tw_rdata, twh_rdata;

  pnc_pease_ntt #(.N(N), .B(B), .W(32)) dut (.clk, .rst_n, .start, .p, .busy, .done, .res_sel,
    .v_en, .v_we, .v_addr, .v_wdata, .v_rdata, .tw_en, .tw_addr, .tw_rdata, .twh_rdata);

  // memory model
  logic [31:0] vmem [2][B][N/B];
  logic [31:0] twm  [B][N/2];
  logic [31:0] twhm [B][N/2];

  always @(posedge clk) begin
    for (int a = 0; a < 2; a++)
      for (int k = 0; k < B; k++)
        for (int q = 0; q < 2; q++)
          if (v_en[a][k][q]) begin
            v_rdata[a][k][q] <= vmem[a][k][v_addr[a][k][q]];
            if (v_we[a][k][q]) vmem[a][k][v_addr[a][k][q]] <= v_wdata[a][k][q];
          end
    for (int j = 0; j < B; j++)
      if (tw_en[j]) begin
        tw_rdata[j]  <= twm[j][tw_addr[j]];
        twh_rdata[j] <= twhm[j][tw_addr[j]];
      end
  end

  initial begin
    longint unsigned pp, w;
    longint unsigned x[], y[];
    pp = P_DEFAULT;
    w = root_of_unity(N, pp);
    checks = 0; failures = 0; finished = 0; start = 0;
    p = 32'(pp);
    for (int e = 0; e < N / 2; e++)
      for (int j = 0; j < B; j++) begin
        twm[j][e]  = 32'(powm(w, e, pp));
        twhm[j][e] = 32'(shoup(powm(w, e, pp), pp));
      end
    @(posedge rst_n);
    for (int run = 0; run < RUNS; run++) begin
      int cyc;
      cyc = 0;
      x = new[N];
      foreach (x[i]) x[i] = (run == 0 && i < 4) ? pp - 1 : rand_res(pp);
      dft(x, w, pp, y);
      for (int i = 0; i < N; i++) begin
        int unsigned s;
        s = bitrev(i, L);
        vmem[0][i % B][i / B] = 32'(x[s]);
        vmem[1][i % B][i / B] = $urandom();
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) begin
        if (busy) cyc++;
        @(negedge clk);
        if (cyc > 10 * EXP_CYC) break;
      end
      checks++;
      if (cyc != EXP_CYC || int'(res_sel) != L % 2) begin
        failures++;
        $display("FAIL N=%0d B=%0d cycles %0d exp %0d res_sel %0d", N, B, cyc, EXP_CYC, res_sel);
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (longint'(vmem[L % 2][k % B][k / B]) != y[k]) begin
          failures++;
          if (failures < 8) $display("FAIL N=%0d B=%0d X[%0d]=%0d exp %0d", N, B, k,
                                     vmem[L % 2][k % B][k / B], y[k]);
        end
      end
    end
    finished = 1;
  end
endmodule
