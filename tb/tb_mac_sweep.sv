`timescale 1ns/1ps
// tb_mac_sweep - cycles per product against the number of products in one
// multiply-accumulate, for the CSA + full-adder pop-count and for the
// one-cycle counter.  With the CSA strategy the column-wise full-adder pass
// is paid once per accumulation, so cycles per product fall as the
// accumulation grows and approach the per-product cost; with the one-cycle
// counter they stay flat.  Operands are random; each run's result is held to
// 5 sigma of its expectation.  Checks that CSA cycles per product fall
// strictly with n, that they stay above the APC ones, and that the APC cost
// per product varies by less than 1.5 cycles across n.
module tb_mac_sweep;
  import sc_pim_pkg::*;

  localparam int unsigned GW    = $clog2(GROUPS);
  localparam int unsigned RES_W = $clog2(GROUPS * NBIT + 1);
  localparam real S  = real'(STEPS_PER_OCT_Q8) / 256.0;
  localparam real KT = $exp(-60.9 * (1.0 - 81.0 / 80.0)) * 0.022;

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
  int xs [GROUPS];
  int ws [GROUPS];

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

  function automatic int ref_code(int x);
    if (x == 0) return 255;
    return int'($floor(S * $ln(1024.0 / real'(x)) / $ln(2.0) + 0.5));
  endfunction

  task automatic run(input int n, input pop_mode_e m, output real per);
    real e, v, p;
    e = 0.0; v = 0.0;
    for (int i = 0; i < n; i++) begin
      p = $exp(-KT * real'(ref_code(xs[i]) + ref_code(ws[i])));
      e += real'(NBIT) * p;
      v += real'(NBIT) * p * (1.0 - p);
    end
    @(negedge clk);
    start = 1; num_mul = (GW+1)'(n); mode = m;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    per = real'(cycles) / real'(n);
    checks++;
    if (real'(result) - e > 5.0 * $sqrt(v) + 2.0 || e - real'(result) > 5.0 * $sqrt(v) + 2.0) failures++;
  endtask

  initial begin
    int ns [6] = '{10, 20, 40, 70, 100, 128};
    real csa [6];
    real apcr [6];
    real amin, amax;
    rst_n = 0; op_we = 0; op_waddr = '0; op_wx = '0; op_ww = '0;
    start = 0; num_mul = '0; mode = POP_APC; op = OP_MAC;
    norm_scale = 10'd256;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < GROUPS; i++) begin
      xs[i] = $urandom_range(1023);
      ws[i] = $urandom_range(1023);
      @(negedge clk);
      op_we = 1; op_waddr = GW'(i); op_wx = 10'(xs[i]); op_ww = 10'(ws[i]);
    end
    @(negedge clk);
    op_we = 0;
    for (int k = 0; k < 6; k++) begin
      run(ns[k], POP_CSA, csa[k]);
      run(ns[k], POP_APC, apcr[k]);
      $display("MULs %0d: CSA+FA %.2f cycles/MUL, APC %.2f cycles/MUL", ns[k], csa[k], apcr[k]);
    end
    amin = apcr[0]; amax = apcr[0];
    for (int k = 0; k < 6; k++) begin
      if (apcr[k] < amin) amin = apcr[k];
      if (apcr[k] > amax) amax = apcr[k];
      checks++;
      if (csa[k] <= apcr[k]) failures++;
      if (k > 0) begin
        checks++;
        if (csa[k] >= csa[k-1]) failures++;
      end
    end
    checks++;
    if (amax - amin > 1.5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
