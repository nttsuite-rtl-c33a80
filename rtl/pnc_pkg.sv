// pnc_pkg: constants and types shared by the Pease no-copy NTT accelerator.
//
// The accelerator computes an N-point number theoretic transform modulo a
// prime p of at most W bits, X[k] = sum_n x[n] * w^(n*k) mod p, with the
// constant-geometry (Pease) schedule: every one of the log2(N) stages reads
// pairs x[2r], x[2r+1] from one array and writes y[r], y[r+N/2] to the other.
// The 32-bit data width follows the paper ("We currently use 32-bit primes").
// The pipeline depths below are this design's own choices.
package pnc_pkg;

  // Data and modulus width.
  parameter int unsigned W = 32;

  // Pipeline depth of pnc_mod_mul (input to registered product).
  parameter int unsigned MUL_LAT = 3;
  // Pipeline depth of pnc_butterfly: the multiplier plus one add/sub stage.
  parameter int unsigned BFLY_LAT = MUL_LAT + 1;
  // Read latency of the block RAMs.
  parameter int unsigned RAM_LAT = 1;
  // Cycles from issuing the last read of a stage until its last write is on
  // the RAM ports. The next stage may issue its first read one cycle later.
  parameter int unsigned DRAIN_CYC = RAM_LAT + BFLY_LAT;

  typedef logic [W-1:0] word_t;

  // Sequencer states of pnc_ctrl.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,  // waiting for start
    ST_ISSUE = 2'd1,  // issuing one row group of B butterflies per cycle
    ST_DRAIN = 2'd2   // letting the last writes of a stage land
  } ctrl_state_e;

  // Host memory-port regions.
  typedef enum logic [1:0] {
    REG_INPUT  = 2'd0,  // input vector, stored at the bit-reversed index
    REG_RESULT = 2'd1,  // transform result, natural order (read back)
    REG_TW     = 2'd2,  // twiddle table w^e, e = 0 .. N/2-1
    REG_TWH    = 2'd3   // Shoup quotients floor(w^e * 2^W / p)
  } region_e;

  // AXI4-Lite register map of pnc_axil_regs (byte addresses).
  parameter logic [7:0] ADDR_CTRL    = 8'h00;  // W: bit0 = start
  parameter logic [7:0] ADDR_STATUS  = 8'h04;  // R: bit0 busy, bit1 done, bit2 result array
  parameter logic [7:0] ADDR_MODULUS = 8'h08;  // R/W: prime p
  parameter logic [7:0] ADDR_CYCLES  = 8'h0C;  // R: cycles taken by the last transform
  parameter logic [7:0] ADDR_CONFIG  = 8'h10;  // R: [7:0] log2 N, [15:8] butterfly cores

  // AXI response codes.
  parameter logic [1:0] RESP_OKAY   = 2'b00;
  parameter logic [1:0] RESP_SLVERR = 2'b10;

  // Reverse the lowest `bits` bits of `v` (bits above are dropped).
  function automatic logic [31:0] bit_reverse(input logic [31:0] v, input int unsigned bits);
    logic [31:0] r;
    r = '0;
    for (int unsigned i = 0; i < 32; i++)
      if (i < bits) r[bits-1-i] = v[i];
    return r;
  endfunction

endpackage
