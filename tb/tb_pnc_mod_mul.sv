// tb_pnc_mod_mul: streams one random product per cycle through the pipelined
// Shoup multiplier and checks every result, MUL_LAT = 3 cycles later, against
// (x*y) mod p computed with a 64-bit remainder. Covers edge operands and the
// primes 97, 2^32 - 2^20 + 1 and 2^32 - 5.
module tb_pnc_mod_mul;
  import tb_pnc_util_pkg::*;

  localparam int LAT = pnc_pkg::MUL_LAT;

  logic clk = 0;
  logic [31:0] x, y, yh, p, z;
  int checks = 0, failures = 0;
  longint unsigned expq[$];

  pnc_mod_mul #(.W(32)) dut (.clk, .x, .y, .yh, .p, .z);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Operands are sampled at an edge; their product is on z after the edge
  // LAT - 1 cycles later, so compare once LAT expectations are queued.
  task automatic drive(longint unsigned px, longint unsigned py);
    x  = 32'(px);
    y  = 32'(py);
    yh = 32'(shoup(py, p));
    expq.push_back(mulm(px, py, p));
    @(posedge clk);
    #1;
    if (expq.size() >= LAT) begin
      longint unsigned e = expq.pop_front();
      checks++;
      if (longint'(z) != e) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d z=%0d exp=%0d", p, z, e);
      end
    end
  endtask

  initial begin
    longint unsigned primes[3] = '{64'd97, P_DEFAULT, 64'hFFFF_FFFB};
    foreach (primes[i]) begin
      longint unsigned pp;
      longint unsigned edges[4];
      pp = primes[i];
      edges = '{0, 1, pp - 1, pp - 2};
      p = 32'(pp);
      expq.delete();
      foreach (edges[a]) foreach (edges[b]) drive(edges[a], edges[b]);
      repeat (4000) drive(rand_res(pp), rand_res(pp));
      repeat (LAT - 1) drive(0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
