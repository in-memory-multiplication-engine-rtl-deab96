`timescale 1ns/1ps
// csa_popcount - two-step pop-count of many products' stochastic bits.
//
// Step 1, row-wise sum: every cycle with row_valid one row of COLS bits is added
// into COLS column counters at once.  The counters are kept as CNT_W bit-planes
// (plane j holds bit j of every column's count), and a row is added with a
// chain of bitwise half-add operations across the planes, the same operation
// for all columns in lock step - the kind of operation an in-memory adder can
// perform on whole rows.  Step 2, column-wise sum: after fa_start a full adder
// adds the COLS column counts one per cycle into the total; sum_valid pulses
// with the total COLS+1 cycles after fa_start.  clear empties the planes.
//
// The order of the two steps (row-wise carry-save first, column-wise full adder
// last, so that the slow step is paid once for many products) follows the
// design.  The bit-plane counter form and the one-row, one-column per cycle
// rates are this implementation's choices.
module csa_popcount #(
  parameter int unsigned COLS  = 128,
  parameter int unsigned CNT_W = 11,
  parameter int unsigned OUT_W = 18
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             row_valid,
  input  logic [COLS-1:0]  row,
  input  logic             fa_start,
  output logic             busy,
  output logic             sum_valid,
  output logic [OUT_W-1:0] sum
);

  localparam int unsigned IW = $clog2(COLS);

  logic [COLS-1:0] plane [CNT_W];
  logic [COLS-1:0] plane_nx [CNT_W];

  // lock-step add of one row into all column counters
  always_comb begin
    logic [COLS-1:0] carry;
    carry = row;
    for (int unsigned j = 0; j < CNT_W; j++) begin
      plane_nx[j] = plane[j] ^ carry;
      carry       = plane[j] & carry;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int unsigned j = 0; j < CNT_W; j++) plane[j] <= '0;
    end else if (clear) begin
      for (int unsigned j = 0; j < CNT_W; j++) plane[j] <= '0;
    end else if (row_valid) begin
      plane <= plane_nx;
    end

  // column-wise full-adder accumulation
  logic [IW-1:0]    col;
  logic [CNT_W-1:0] col_count;
  logic [OUT_W-1:0] acc;

  always_comb
    for (int unsigned j = 0; j < CNT_W; j++) col_count[j] = plane[j][col];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy      <= 1'b0;
      sum_valid <= 1'b0;
      sum       <= '0;
      col       <= '0;
      acc       <= '0;
    end else begin
      sum_valid <= 1'b0;
      if (fa_start && !busy) begin
        busy <= 1'b1;
        col  <= '0;
        acc  <= '0;
      end else if (busy) begin
        acc <= acc + OUT_W'(col_count);
        col <= col + 1'b1;
        if (col == IW'(COLS - 1)) begin
          busy      <= 1'b0;
          sum_valid <= 1'b1;
          sum       <= acc + OUT_W'(col_count);
        end
      end
    end

endmodule
