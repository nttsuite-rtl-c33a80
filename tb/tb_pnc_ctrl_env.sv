// tb_pnc_ctrl_env: drives one pnc_ctrl of size N, B through two transforms
// (with a stray start pulse in the middle of the first) and checks the issue
// order (stage-major, row groups 0 .. N/(2B)-1), the drain between stages,
// the busy length L * (N/(2B) + DRAIN_CYC) and a single done pulse per run.
module tb_pnc_ctrl_env #(
  parameter int unsigned N = 32,
  parameter int unsigned B = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned L   = $clog2(N);
  localparam int unsigned RPS = N / (2 * B);
  localparam int unsigned GW  = (RPS > 1) ? $clog2(RPS) : 1;
  localparam int unsigned SW  = $clog2(L + 1);
  localparam int unsigned EXP_CYC = L * (RPS + pnc_pkg::DRAIN_CYC);

  logic start, busy, done, issue;
  logic [SW-1:0] stage;
  logic [GW-1:0] group;

  pnc_ctrl #(.N(N), .B(B)) dut (.clk, .rst_n, .start, .busy, .done, .issue, .stage, .group);

  initial begin
    checks = 0; failures = 0; finished = 0; start = 0;
    @(posedge rst_n);
    for (int run = 0; run < 2; run++) begin
      int busy_cyc, n_issue, n_done, gap, exp_s, exp_g;
      busy_cyc = 0; n_issue = 0; n_done = 0; gap = 0; exp_s = 0; exp_g = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (busy) begin
        if (run == 0 && busy_cyc == 3) start = 1; else start = 0;  // ignored
        if (issue) begin
          checks++;
          if (int'(stage) != exp_s || int'(group) != exp_g) begin
            failures++;
            $display("FAIL N=%0d issue order s=%0d g=%0d exp %0d %0d", N, stage, group, exp_s, exp_g);
          end
          if (exp_g == 0 && exp_s != 0 && gap != pnc_pkg::DRAIN_CYC) begin
            failures++;
            $display("FAIL N=%0d drain gap %0d", N, gap);
          end
          gap = 0;
          exp_g++;
          if (exp_g == RPS) begin exp_g = 0; exp_s++; end
          n_issue++;
        end else gap++;
        busy_cyc++;
        @(negedge clk);
        if (done) n_done++;
      end
      start = 0;
      repeat (3) begin @(negedge clk); if (done) n_done++; end
      checks += 3;
      if (busy_cyc != EXP_CYC) begin failures++; $display("FAIL N=%0d busy %0d exp %0d", N, busy_cyc, EXP_CYC); end
      if (n_issue != L * RPS) begin failures++; $display("FAIL N=%0d issues %0d", N, n_issue); end
      if (n_done != 1) begin failures++; $display("FAIL N=%0d done pulses %0d", N, n_done); end
    end
    finished = 1;
  end
endmodule
