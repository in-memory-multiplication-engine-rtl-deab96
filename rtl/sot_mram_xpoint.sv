`timescale 1ns/1ps
// sot_mram_xpoint - cross-point SOT-MRAM array used as a bank of stochastic
// bits, behavioural model.
//
// This is a behavioural model of the magnetic array, its row source drivers and
// its sense amplifiers, not synthesizable logic: what it models is the thermal,
// random switching of each magnetic junction.  The array has GROUPS groups of
// ROWS_PER_MUL rows of COLS cells; one group holds the stochastic bits of one
// product.  Three operations:
//   preset    - on a clock edge with preset high, every cell of group wr_group
//               is written to 1 (the deterministic reversed-current write).
//   pulse     - while v_t is high its width is measured; when it falls, every
//               cell of group wr_group that still holds 1 keeps it with
//                 P_usw = exp(-tau * exp(-DELTA * (1 - I_UA / IC_UA)))
//               (tau in ns) and otherwise switches to 0.  All rows of the group
//               are written at once.  Two pulses in a row leave a cell at 1 with
//               the product of the two probabilities: that is the
//               multiplication.
//   read      - rd_bits shows group rd_group, row r on bits [r*COLS +: COLS],
//               as the sense amplifiers on the bit lines see it (no latency).
// wr_group must be stable while v_t is high.  The switching law, DELTA = 60.9,
// IC_UA = 80 and I_UA = 81 (one of the currents plotted for the device) follow
// the design; IR drop along a row is not modelled, and the geometry is this
// implementation's choice.
// Critical-current variation: with SIGMA_IC > 0 every cell sees its own
// critical current IC_UA * (1 + SIGMA_IC * g) for each pulse, g a standard
// normal number (Box-Muller, clipped to +-6) drawn afresh per cell and pulse.
// The design studies 0 to 10 % of such variation; drawing it per pulse (which
// lumps manufacturing spread and thermal fluctuation together) is this
// model's own choice.  The default 0 gives every cell the same Ic.
module sot_mram_xpoint #(
  parameter int unsigned ROWS_PER_MUL = 8,
  parameter int unsigned COLS         = 128,
  parameter int unsigned GROUPS       = 128,
  parameter real         DELTA        = 60.9,
  parameter real         IC_UA        = 80.0,
  parameter real         I_UA         = 81.0,
  parameter real         SIGMA_IC     = 0.0,
  localparam int unsigned GW          = $clog2(GROUPS),
  localparam int unsigned GBITS       = ROWS_PER_MUL * COLS
) (
  input  logic             clk,
  input  logic             preset,
  input  logic [GW-1:0]    wr_group,
  input  logic             v_t,
  input  logic [GW-1:0]    rd_group,
  output logic [GBITS-1:0] rd_bits
);

  localparam int unsigned ROWS = GROUPS * ROWS_PER_MUL;

  logic [COLS-1:0] cells [ROWS];

  // rising edges of v_t seen, and pulses already applied to the cells
  int unsigned rises;
  int unsigned applied;
  realtime     t_rise;

  initial begin
    rises   = 0;
    applied = 0;
    t_rise  = 0.0;
  end

  always @(posedge v_t) begin
    t_rise = $realtime;
    rises  = rises + 1;
  end

  // single writer of the cells: clock edges preset, falling pulse edges switch
  always @(posedge clk or negedge v_t) begin
    if (!v_t && applied != rises) begin
      real tau_ns, p_keep, u, g, ic;
      tau_ns  = ($realtime - t_rise) / 1.0ns;
      p_keep  = $exp(-tau_ns * $exp(-DELTA * (1.0 - I_UA / IC_UA)));
      applied = rises;
      for (int unsigned r = 0; r < ROWS_PER_MUL; r++)
        for (int unsigned c = 0; c < COLS; c++) begin
          if (SIGMA_IC > 0.0) begin
            g = $sqrt(-2.0 * $ln((real'($urandom) + 1.0) / 4294967296.0))
              * $cos(6.283185307179586 * real'($urandom) / 4294967296.0);
            if (g > 6.0) g = 6.0;
            if (g < -6.0) g = -6.0;
            ic     = IC_UA * (1.0 + SIGMA_IC * g);
            p_keep = $exp(-tau_ns * $exp(-DELTA * (1.0 - I_UA / ic)));
          end
          u = real'($urandom) / 4294967296.0;
          if (u >= p_keep) cells[int'(wr_group) * ROWS_PER_MUL + r][c] = 1'b0;
        end
    end else if (preset) begin
      for (int unsigned r = 0; r < ROWS_PER_MUL; r++)
        cells[int'(wr_group) * ROWS_PER_MUL + r] = '1;
    end
  end

  always_comb
    for (int unsigned r = 0; r < ROWS_PER_MUL; r++)
      rd_bits[r*COLS +: COLS] = cells[int'(rd_group) * ROWS_PER_MUL + r];

endmodule
