`timescale 1ns/1ps
// tb_mc_accuracy - Monte Carlo accuracy run of a single product, as in the
// accuracy study of the design: 1000 repetitions of one multiplication with
// pulse widths of about 0.3 ns and 0.4 ns and 1024 stochastic bits.
//
// Operands 529 and 439 give codes 14 and 18, i.e. pulses of 0.308 ns and
// 0.396 ns.  For each repetition the error P_XY - P_X*P_Y is taken, with P_XY
// the counted fraction of surviving cells and P_X, P_Y from the switching law.
// Checks: the mean error is within 5 standard errors of zero (no bias), and
// the standard deviation lies within 20 % of the binomial value
// sqrt(p(1-p)/1024), about 1.3 %.  The measured value is printed.
module tb_mc_accuracy;
  import sc_pim_pkg::*;

  localparam int unsigned GW    = $clog2(GROUPS);
  localparam int unsigned RES_W = $clog2(GROUPS * NBIT + 1);
  localparam int ITER = 1000;
  localparam real K = $exp(-60.9 * (1.0 - 81.0 / 80.0));

  logic             clk = 1'b0, rst_n;
  logic             op_we, start, busy, done, v_t;
  logic [GW-1:0]    op_waddr;
  logic [9:0]       op_wx, op_ww;
  logic [GW:0]      num_mul;
  pop_mode_e        mode;
  mac_op_e          op;
  logic [9:0]       norm_scale;
  logic [RES_W-1:0] result;
  logic [31:0]      cycles;

  int checks = 0, failures = 0;

  sc_pim_engine dut (
    .clk, .rst_n, .op_we, .op_waddr, .op_wx, .op_ww,
    .start, .num_mul, .mode, .op, .norm_scale, .busy, .done, .result, .cycles, .v_t
  );

  always #0.5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p, err, s1, s2, mean, sd, sd_ref;
    rst_n = 0; op_we = 0; op_waddr = '0; op_wx = '0; op_ww = '0;
    start = 0; num_mul = '0; mode = POP_APC; op = OP_MAC;
    norm_scale = 10'd256;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    op_we = 1; op_wx = 10'd529; op_ww = 10'd439;
    @(negedge clk);
    op_we = 0;
    p = $exp(-K * 0.308) * $exp(-K * 0.396);
    s1 = 0.0; s2 = 0.0;
    for (int it = 0; it < ITER; it++) begin
      @(negedge clk);
      start = 1; num_mul = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      err = real'(result) / real'(NBIT) - p;
      s1 += err;
      s2 += err * err;
    end
    mean   = s1 / ITER;
    sd     = $sqrt(s2 / ITER - mean * mean);
    sd_ref = $sqrt(p * (1.0 - p) / real'(NBIT));
    $display("P_X*P_Y = %f, mean error %f, sigma %f (binomial %f)", p, mean, sd, sd_ref);
    checks++;
    if (mean > 5.0 * sd_ref / $sqrt(real'(ITER)) || -mean > 5.0 * sd_ref / $sqrt(real'(ITER))) failures++;
    checks++;
    if (sd < 0.8 * sd_ref || sd > 1.2 * sd_ref) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
