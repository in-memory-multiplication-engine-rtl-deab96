`timescale 1ns/1ps
// operand_mem - binary operand store of the multiplier.
//
// Holds DEPTH pairs (x, w) of N-bit binary operands, the numbers that the
// engine multiplies pairwise and accumulates.  A host writes pairs through the
// write port; the controller reads one pair per access.  The read is
// synchronous: address and re in one cycle, data valid in the next, as from a
// memory row read through sense amplifiers.  That the operands sit in memory and
// are read by sense amplifiers follows the design; the pair organisation, the
// depth and the one-cycle latency are this implementation's choices.
module operand_mem #(
  parameter int unsigned N     = 10,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [N-1:0]  wx,
  input  logic [N-1:0]  ww,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [N-1:0]  rx,
  output logic [N-1:0]  rw
);

  logic [2*N-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wx, ww};
    if (re) {rx, rw} <= mem[raddr];
  end

endmodule
