`timescale 1ns/1ps
// pulse_norm - normalization of the pulse code between the logarithm table
// and the pulse generator.
//
// The table holds pulse codes for one nominal switching rate of the cells.
// If the cells switch faster or slower than that (another drive current, a
// different batch, a spread of critical currents), every pulse must be
// stretched or shortened by the same factor for P_usw to stay equal to
// x / 2^N.  This unit applies that factor at run time:
//   code_out = min(2^CODE_BW - 1, round(code_in * scale / 2^FRAC))
// with scale an unsigned fixed-point number, 2^FRAC meaning 1.0.  The
// all-ones code (operand 0, "switch everything") passes unchanged, so a zero
// operand still gives the longest pulse whatever the scale.  The same factor
// also moves the working point, e.g. to keep P_usw near 0.5 for mid-range
// operands.
//
// Purely combinational: it sits on the table's registered output, so it adds
// no cycle.  The design names normalization units that tune the pulse
// duration for accuracy and speed; this circuit, its fixed-point format and
// the pass-through of the zero code are this implementation's own.
module pulse_norm #(
  parameter int unsigned CODE_BW = 8,
  parameter int unsigned SCALE_W = 10,
  parameter int unsigned FRAC    = 8
) (
  input  logic [CODE_BW-1:0] code_in,
  input  logic [SCALE_W-1:0] scale,
  output logic [CODE_BW-1:0] code_out
);

  localparam int unsigned PW = CODE_BW + SCALE_W;

  logic [PW-1:0] prod;
  logic [PW-1:0] q;

  always_comb begin
    prod = PW'(code_in) * PW'(scale) + PW'(1 << (FRAC - 1));
    q    = prod >> FRAC;
    if (&code_in || q > PW'({CODE_BW{1'b1}}))
      code_out = '1;
    else
      code_out = q[CODE_BW-1:0];
  end

endmodule
