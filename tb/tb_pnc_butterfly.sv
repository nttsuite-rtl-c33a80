// tb_pnc_butterfly: streams random butterflies, one per cycle with random
// gaps, and checks y0 = a + w*b and y1 = a - w*b (mod p) and that out_valid
// rises exactly BFLY_LAT = 4 cycles after in_valid.
module tb_pnc_butterfly;
  import tb_pnc_util_pkg::*;

  localparam int LAT = pnc_pkg::BFLY_LAT;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [31:0] a, b, w, wh, p, y0, y1;
  int checks = 0, failures = 0;
  int cycle = 0;

  typedef struct { longint unsigned e0, e1; int t; } exp_t;
  exp_t expq[$];

  pnc_butterfly #(.W(32)) dut (.clk, .rst_n, .in_valid, .a, .b, .w, .wh, .p, .out_valid, .y0, .y1);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      automatic exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected out_valid");
      end else begin
        e = expq.pop_front();
        if (longint'(y0) != e.e0 || longint'(y1) != e.e1 || cycle - e.t != LAT) begin
          failures++;
          if (failures < 10)
            $display("FAIL y0=%0d/%0d y1=%0d/%0d lat=%0d", y0, e.e0, y1, e.e1, cycle - e.t);
        end
      end
    end
  end

  initial begin
    longint unsigned pp = P_DEFAULT;
    p = 32'(pp);
    in_valid = 0; a = 0; b = 0; w = 0; wh = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      a = 32'(rand_res(pp)); b = 32'(rand_res(pp)); w = 32'(rand_res(pp));
      wh = 32'(shoup(w, pp));
      if (in_valid) begin
        longint unsigned t;
        t = mulm(64'(b), 64'(w), pp);
        expq.push_back('{addm(64'(a), t, pp), subm(64'(a), t, pp), cycle});
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
