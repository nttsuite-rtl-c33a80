// tb_pnc_mod_addsub: checks modular sum and difference against 64-bit
// reference arithmetic, for random residues and the edge values 0, 1, p-1,
// under three primes (a small one, the 2^32 - 2^20 + 1 default and the
// largest 32-bit prime 2^32 - 5, whose sums overflow 32 bits).
module tb_pnc_mod_addsub;
  import tb_pnc_util_pkg::*;

  logic [31:0] a, b, p, sum, diff;
  int checks = 0, failures = 0;
  logic clk = 0;

  pnc_mod_addsub #(.W(32)) dut (.a, .b, .p, .sum, .diff);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint unsigned pa, longint unsigned pb);
    a = 32'(pa); b = 32'(pb);
    #1;
    checks++;
    if (longint'(sum) != addm(pa, pb, p) || longint'(diff) != subm(pa, pb, p)) begin
      failures++;
      if (failures < 10) $display("FAIL p=%0d a=%0d b=%0d sum=%0d diff=%0d", p, a, b, sum, diff);
    end
  endtask

  initial begin
    longint unsigned primes[3] = '{64'd97, P_DEFAULT, 64'hFFFF_FFFB};
    foreach (primes[i]) begin
      longint unsigned pp;
      longint unsigned edges[4];
      pp = primes[i];
      edges = '{0, 1, pp - 1, pp / 2};
      p = 32'(pp);
      foreach (edges[x]) foreach (edges[y]) check(edges[x], edges[y]);
      repeat (3000) check(rand_res(pp), rand_res(pp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
