`timescale 1ns/1ps
// ln_lut - logarithm lookup table that turns a binary operand into a pulse code.
//
// The stochastic cell switching is exponential in pulse duration, so an operand
// X must become a duration proportional to -ln(X / 2^N) for the surviving
// fraction of cells to equal X / 2^N.  This table stores, for every X, that
// duration in DTC steps:  code(X) = round(S * log2(2^N / X)), with S = S_Q8/256
// steps per halving of the survival probability (formula in sc_pim_pkg).
// X = 0 maps to the all-ones code, the longest pulse, which switches
// practically every cell.
//
// The table is a ROM of 2^N words filled at elaboration from the formula.  The
// read is synchronous: addr with rd_en in one cycle, code in the next.
// A lookup table for the logarithm follows the design; the scaling S, the
// rounding and the code for zero are this implementation's choices.
module ln_lut
  import sc_pim_pkg::*;
#(
  parameter int unsigned N       = OP_BITS,
  parameter int unsigned CODE_BW = CODE_W,
  parameter int unsigned S_Q8    = STEPS_PER_OCT_Q8
) (
  input  logic               clk,
  input  logic               rd_en,
  input  logic [N-1:0]       addr,
  output logic [CODE_BW-1:0] code
);

  typedef logic [CODE_BW-1:0] rom_t [2**N];

  function automatic rom_t build_rom();
    rom_t r;
    for (int unsigned x = 0; x < 2**N; x++)
      r[x] = CODE_BW'(pulse_code(x, N, S_Q8, CODE_BW));
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  always_ff @(posedge clk)
    if (rd_en) code <= ROM[addr];

endmodule
