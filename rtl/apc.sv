`timescale 1ns/1ps
// apc - one-cycle parallel pop-count of one product's stochastic bits.
//
// Counts the ones among the NB bits of a product group in a single clock cycle:
// bits and in_valid in one cycle, count with out_valid in the next.  The count
// is formed by a balanced combinational adder tree (level l adds pairs of
// l-bit partial counts into (l+1)-bit ones) and registered.  The counter of
// the design is an approximate parallel counter whose approximation is not
// described; this one counts exactly, which makes it an upper bound on
// accuracy and area.  The one-cycle latency follows the design.
module apc #(
  parameter int unsigned NB = 1024,
  localparam int unsigned CW = $clog2(NB + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NB-1:0] bits,
  output logic          out_valid,
  output logic [CW-1:0] count
);

  localparam int unsigned LEVELS = $clog2(NB);
  localparam int unsigned NP     = 2 ** LEVELS;

  logic [NP-1:0] leaf;
  assign leaf = NP'(bits);

  // level l holds NP >> l partial counts of l+1 bits each, flattened
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NN = NP >> l;
    localparam int unsigned W  = l + 1;
    logic [NN*W-1:0] s;
    if (l == 0) begin : g_leaf
      assign s = leaf;
    end else begin : g_add
      for (genvar i = 0; i < NN; i++) begin : g_node
        assign s[i*W +: W] = W'(g_lvl[l-1].s[2*i*l +: l]) + W'(g_lvl[l-1].s[(2*i+1)*l +: l]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      count     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) count <= CW'(g_lvl[LEVELS].s);
    end

endmodule
