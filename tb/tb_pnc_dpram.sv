// tb_pnc_dpram: random traffic on both ports of a 64 x 32 dual-port RAM,
// checked against a model array: one-cycle read latency, read-first data on
// a port that writes, and writes from either port visible to the other.
module tb_pnc_dpram;
  localparam int DEPTH = 64;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we;
  logic [5:0] a_addr, b_addr;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  pnc_dpram #(.DW(32), .DEPTH(DEPTH)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                                            .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ea, eb;
    logic ca, cb;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0;
    // fill through port A, then port B for the upper half
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      model[i] = $urandom();
      if (i < DEPTH / 2) begin a_en = 1; a_we = 1; a_addr = 6'(i); a_wdata = model[i]; b_en = 0; end
      else begin b_en = 1; b_we = 1; b_addr = 6'(i); b_wdata = model[i]; a_en = 0; end
    end
    repeat (5000) begin
      @(negedge clk);
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_addr = 6'($urandom());
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1); b_addr = 6'($urandom());
      a_wdata = $urandom(); b_wdata = $urandom();
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) b_we = 0;
      ca = a_en; cb = b_en;
      ea = model[a_addr]; eb = model[b_addr];
      @(posedge clk);
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      #1;
      if (ca) begin checks++; if (a_rdata !== ea) begin failures++; $display("FAIL A"); end end
      if (cb) begin checks++; if (b_rdata !== eb) begin failures++; $display("FAIL B"); end end
    end
    // holding: a disabled port keeps its last read data
    @(negedge clk); a_en = 1; a_we = 0; a_addr = 6'd5; b_en = 0;
    @(negedge clk); a_en = 0; ea = a_rdata;
    repeat (3) @(negedge clk);
    checks++;
    if (a_rdata !== ea || ea !== model[5]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
