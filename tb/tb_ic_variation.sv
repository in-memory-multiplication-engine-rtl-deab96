`timescale 1ns/1ps
// tb_ic_variation - multiplication accuracy of the stochastic array when the
// cells' critical current varies.
//
// Four copies of sot_mram_xpoint (two groups of 8 x 128 cells each) see the
// same operations, with a relative critical-current spread SIGMA_IC of 0, 2, 5
// and 10 %, the range the design is studied over.  Each of 100 trials presets
// group 0, applies a 0.308 ns pulse and a 0.396 ns pulse (the two operands of
// the Monte Carlo case, 14 and 18 steps of 22 ps) and counts the cells left
// at 1.
//
// Reference, worked out here independently of the model: with the spread
// drawn per cell and pulse, a cell keeps its 1 through a pulse of width tau
// with the mean probability
//   pbar(tau) = integral over g of phi(g) * exp(-tau * exp(-Delta (1 - I / (Ic (1 + s g)))))
// (trapezoid rule over g in [-6, 6], phi the standard normal density), and
// through both pulses with pbar(0.308) * pbar(0.396).  The count is then
// binomial over 1024 cells.  Checked for each spread: every trial within
// 6 sigma of the binomial, the mean of the 100 trials within 5 sigma of the
// mean, and the spread of the trials within 35 % of the binomial one.  The
// measured bias against the ideal product and the spread, both as a fraction
// of the 1024 cells, are printed for each spread.  The per-pulse draw is this
// model's choice; see sot_mram_xpoint.
module tb_ic_variation;
  localparam int unsigned R = 8, C = 128, G = 2, NB = R * C, NS = 4, TRIALS = 100;
  localparam real DELTA = 60.9, IC = 80.0, I = 81.0;
  localparam real TAU_X = 0.308, TAU_Y = 0.396;
  localparam real SIG [NS] = '{0.0, 0.02, 0.05, 0.10};

  logic          clk, preset, v_t;
  logic          wr_group = 1'b0, rd_group = 1'b0;
  logic [NB-1:0] rd_bits [NS];

  int checks = 0, failures = 0;

  for (genvar i = 0; i < NS; i++) begin : g_arr
    sot_mram_xpoint #(.ROWS_PER_MUL(R), .COLS(C), .GROUPS(G), .SIGMA_IC(SIG[i])) dut (
      .clk, .preset, .wr_group, .v_t, .rd_group, .rd_bits(rd_bits[i])
    );
  end

  initial begin
    clk    = 1'b0;
    preset = 1'b0;
    v_t    = 1'b0;
  end

  always #0.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_one(real tau, real ic);
    return $exp(-tau * $exp(-DELTA * (1.0 - I / ic)));
  endfunction

  function automatic real pbar(real tau, real s);
    real acc = 0.0, g, w;
    if (s == 0.0) return p_one(tau, IC);
    for (int k = 0; k <= 2400; k++) begin
      g = -6.0 + 12.0 * real'(k) / 2400.0;
      w = $exp(-0.5 * g * g) / 2.5066282746310002 * (12.0 / 2400.0);
      if (k == 0 || k == 2400) w = 0.5 * w;
      acc += w * p_one(tau, IC * (1.0 + s * g));
    end
    return acc;
  endfunction

  function automatic int ones(input logic [NB-1:0] b);
    int n = 0;
    for (int k = 0; k < NB; k++) n += int'(b[k]);
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pulse(input real tau);
    @(negedge clk);
    v_t = 1'b1;
    #(tau);
    v_t = 1'b0;
    @(negedge clk);
  endtask

  real p_exp [NS], sum [NS], sum2 [NS];

  initial begin
    real p, sd, mean, var_m, sd_m, ideal;
    int  n;
    for (int i = 0; i < NS; i++) begin
      p_exp[i] = pbar(TAU_X, SIG[i]) * pbar(TAU_Y, SIG[i]);
      sum[i]   = 0.0;
      sum2[i]  = 0.0;
    end
    repeat (2) @(negedge clk);
    for (int t = 0; t < TRIALS; t++) begin
      preset = 1'b1;
      @(negedge clk);
      preset = 1'b0;
      pulse(TAU_X);
      pulse(TAU_Y);
      for (int i = 0; i < NS; i++) begin
        n  = ones(rd_bits[i]);
        p  = p_exp[i];
        sd = $sqrt(real'(NB) * p * (1.0 - p));
        check(real'(n) > real'(NB) * p - 6.0 * sd && real'(n) < real'(NB) * p + 6.0 * sd,
              $sformatf("sigma %0.2f trial %0d: %0d ones, expected %0.1f", SIG[i], t, n, real'(NB) * p));
        sum[i]  += real'(n);
        sum2[i] += real'(n) * real'(n);
      end
    end
    ideal = real'(NB) * p_one(TAU_X, IC) * p_one(TAU_Y, IC);
    for (int i = 0; i < NS; i++) begin
      p     = p_exp[i];
      sd    = $sqrt(real'(NB) * p * (1.0 - p));
      mean  = sum[i] / real'(TRIALS);
      var_m = (sum2[i] - real'(TRIALS) * mean * mean) / real'(TRIALS - 1);
      sd_m  = $sqrt(var_m);
      check(mean > real'(NB) * p - 5.0 * sd / $sqrt(real'(TRIALS)) &&
            mean < real'(NB) * p + 5.0 * sd / $sqrt(real'(TRIALS)),
            $sformatf("sigma %0.2f: mean %0.2f, expected %0.2f", SIG[i], mean, real'(NB) * p));
      check(sd_m > 0.65 * sd && sd_m < 1.35 * sd,
            $sformatf("sigma %0.2f: spread %0.2f, binomial %0.2f", SIG[i], sd_m, sd));
      $display("sigma(Ic) %4.1f %%: mean %7.2f ones (expected %7.2f), bias vs. no spread %6.2f %%, spread %5.2f %% of %0d cells",
               100.0 * SIG[i], mean, real'(NB) * p, 100.0 * (mean - ideal) / real'(NB),
               100.0 * sd_m / real'(NB), NB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
