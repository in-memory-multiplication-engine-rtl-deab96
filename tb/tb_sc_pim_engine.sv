`timescale 1ns/1ps
// tb_sc_pim_engine - end-to-end test of the multiply-accumulate engine at its
// default sizes (10-bit operands, 1024 stochastic bits per product, 128
// product groups).
//
// For every operation the expected result is worked out independently with
// real arithmetic: each operand's pulse code round(S*log2(1024/x)) (all ones
// for 0), each product's survival probability exp(-k * 22 ps * (cx + cw)),
// summed over the pairs; the result must lie within 5 standard deviations of
// the binomial spread (plus 2 counts).  It is also held against the exact
// sum of x*w/1024 within that spread plus 6 %, the error the 22 ps code
// rounding can add.  The cycle count of every operation, from the cycle with
// start to the one with done, is checked against the controller's schedule:
// per product 6 cycles plus the cycles each pulse needs (max(1, floor(width in
// ns)) each) plus one in APC mode; then 3 cycles in APC mode, or ROWS cycles per
// product plus COLS + 4 cycles in CSA mode.
//
// Operations: single products, a 100-product multiply-accumulate (the
// evaluated case) with each pop-count strategy, zero and full-scale operands, an
// empty operation, one using all 128 groups, and weights stored ahead of time
// (OP_LOAD_W, whose result must be 0 and whose cycles are 4 plus w's pulse per
// product, plus 2) then multiplied by x pulses alone (OP_MAC_PRE, 4 plus x's
// pulse per product, plus the counting as above).  Each mechanism is counted and
// must occur.  Two operations run with the pulse scale at 1.5 and 0.75; their
// expected codes go through the same rounding and clipping as the scale unit,
// and the exact-product check is left out for them (the product is scaled).
module tb_sc_pim_engine;
  import sc_pim_pkg::*;

  localparam int unsigned GW    = $clog2(GROUPS);
  localparam int unsigned RES_W = $clog2(GROUPS * NBIT + 1);
  localparam real S  = real'(STEPS_PER_OCT_Q8) / 256.0;
  localparam real KT = $exp(-60.9 * (1.0 - 81.0 / 80.0)) * 0.022; // per code step

  logic             clk = 1'b0, rst_n;
  logic             op_we;
  logic [GW-1:0]    op_waddr;
  logic [9:0]       op_wx, op_ww;
  logic             start, busy, done, v_t;
  logic [GW:0]      num_mul;
  pop_mode_e        mode;
  mac_op_e          op;
  logic [9:0]       norm_scale;
  logic [RES_W-1:0] result;
  logic [31:0]      cycles;

  int checks = 0, failures = 0;
  int n_load = 0, n_pre = 0, n_apc = 0, n_csa = 0, n_zero = 0, n_full = 0, n_empty = 0, n_long = 0, n_mac = 0, n_nopulse = 0, n_norm = 0;
  int xs [GROUPS];
  int ws [GROUPS];

  sc_pim_engine dut (
    .clk, .rst_n, .op_we, .op_waddr, .op_wx, .op_ww,
    .start, .num_mul, .mode, .op, .norm_scale, .busy, .done, .result, .cycles, .v_t
  );

  always #0.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_code(int x);
    if (x == 0) return 255;
    return int'($floor(S * $ln(1024.0 / real'(x)) / $ln(2.0) + 0.5));
  endfunction

  // the pulse-scale unit: code 255 kept, others scaled by norm_scale / 256
  function automatic int norm_code(int c);
    int q;
    if (c == 255) return 255;
    q = int'($floor(real'(c) * real'(norm_scale) / 256.0 + 0.5));
    return (q > 255) ? 255 : q;
  endfunction

  function automatic int pulse_cycles(int c);
    int w;
    w = (c * 22) / 1000;
    return (w < 1) ? 1 : w;
  endfunction

  task automatic load(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      op_we = 1; op_waddr = GW'(i); op_wx = 10'(xs[i]); op_ww = 10'(ws[i]);
    end
    @(negedge clk);
    op_we = 0;
  endtask

  task automatic run(input int n, input pop_mode_e m, input mac_op_e o = OP_MAC);
    real e, var_sum, exact, p;
    int  exp_cyc, cyc, cx, cw;
    e = 0.0; var_sum = 0.0; exact = 0.0; exp_cyc = 0;
    for (int i = 0; i < n; i++) begin
      cx = norm_code(ref_code(xs[i]));
      cw = norm_code(ref_code(ws[i]));
      p  = $exp(-KT * real'(cx + cw));
      e += real'(NBIT) * p;
      var_sum += real'(NBIT) * p * (1.0 - p);
      exact += real'(xs[i]) * real'(ws[i]) / 1024.0;
      if (o == OP_MAC)
        exp_cyc += 6 + pulse_cycles(cx) + pulse_cycles(cw) + ((m == POP_APC) ? 1 : 0);
      else if (o == OP_LOAD_W)
        exp_cyc += 4 + pulse_cycles(cw);
      else
        exp_cyc += 4 + pulse_cycles(cx) + ((m == POP_APC) ? 1 : 0);
      if (xs[i] == 0 || ws[i] == 0) n_zero++;
      if (cx == 0 || cw == 0) n_nopulse++;
      if (pulse_cycles(cx) > 1 || pulse_cycles(cw) > 1) n_long++;
      if (xs[i] == 1023 && ws[i] == 1023) n_full++;
    end
    if (o == OP_LOAD_W) begin
      exp_cyc += 2;
      e = 0.0; var_sum = 0.0; exact = 0.0;
    end else exp_cyc += (m == POP_APC) ? 3 : n * ROWS_PER_MUL + COLS + 4;
    if (n == 0) exp_cyc = 2;
    @(negedge clk);
    start = 1; num_mul = (GW+1)'(n); mode = m; op = o;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (real'(result) - e > 5.0 * $sqrt(var_sum) + 2.0 || e - real'(result) > 5.0 * $sqrt(var_sum) + 2.0) begin
      failures++;
      $display("n=%0d mode=%s result %0d expected %f sd %f", n, m.name(), result, e, $sqrt(var_sum));
    end
    if (norm_scale == 10'd256) checks++;
    if (norm_scale == 10'd256 && (real'(result) - exact > 5.0 * $sqrt(var_sum) + 2.0 + 0.06 * exact ||
        exact - real'(result) > 5.0 * $sqrt(var_sum) + 2.0 + 0.06 * exact)) begin
      failures++;
      $display("n=%0d result %0d exact product sum %f", n, result, exact);
    end
    checks++;
    if (cyc != exp_cyc || cycles != 32'(exp_cyc)) begin
      failures++;
      $display("n=%0d mode=%s cycles %0d (reported %0d) expected %0d", n, m.name(), cyc, cycles, exp_cyc);
    end
    if (n == 0) n_empty++;
    if (o == OP_LOAD_W) n_load++;
    if (o == OP_MAC_PRE) n_pre++;
    if (n > 1) n_mac++;
    if (m == POP_APC) n_apc++; else n_csa++;
    if (norm_scale != 10'd256) n_norm++;
    $display("op=%s n=%0d mode=%s result=%0d expected=%.1f exact=%.1f cycles=%0d (%.1f per product)",
             o.name(), n, m.name(), result, e, exact, cyc, (n > 0) ? real'(cyc) / real'(n) : 0.0);
  endtask

  initial begin
    rst_n = 0; op_we = 0; op_waddr = '0; op_wx = '0; op_ww = '0;
    start = 0; num_mul = '0; mode = POP_APC; op = OP_MAC;
    norm_scale = 10'd256;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // single products
    xs[0] = 512; ws[0] = 512;   load(1); run(1, POP_APC); run(1, POP_CSA);
    xs[0] = 1023; ws[0] = 1023; load(1); run(1, POP_APC);
    xs[0] = 0; ws[0] = 700;     load(1); run(1, POP_APC);
    xs[0] = 300; ws[0] = 1;     load(1); run(1, POP_CSA);
    // the evaluated case: 100 products accumulated, both pop-count strategies
    for (int i = 0; i < GROUPS; i++) begin
      xs[i] = $urandom_range(1023);
      ws[i] = $urandom_range(1023);
    end
    load(GROUPS);
    run(100, POP_APC);
    run(100, POP_CSA);
    // every group of the array in one operation
    run(GROUPS, POP_CSA);
    run(GROUPS, POP_APC);
    // weights converted ahead of time, then multiplied by x pulses alone
    run(100, POP_APC, OP_LOAD_W);
    run(100, POP_APC, OP_MAC_PRE);
    run(64, POP_CSA, OP_LOAD_W);
    run(64, POP_CSA, OP_MAC_PRE);
    // pulses stretched by 1.5 and shortened to 0.75 (scaled survival)
    norm_scale = 10'd384;
    run(40, POP_APC);
    norm_scale = 10'd192;
    run(40, POP_CSA);
    norm_scale = 10'd256;
    // nothing to do
    run(0, POP_CSA);
    checks++;
    if (result != 0) failures++;
    // every mechanism must have occurred
    checks++;
    if (n_load == 0 || n_pre == 0 || n_apc == 0 || n_csa == 0 || n_zero == 0 || n_full == 0 || n_empty == 0 ||
        n_long == 0 || n_mac == 0 || n_nopulse == 0 || n_norm == 0) begin
      failures++;
      $display("mechanism missing");
    end
    $display("mechanisms: load_w=%0d mac_pre=%0d apc=%0d csa=%0d zero_operand=%0d full_scale=%0d empty=%0d multi_cycle_pulse=%0d mac=%0d no_pulse=%0d pulse_scale=%0d",
             n_load, n_pre, n_apc, n_csa, n_zero, n_full, n_empty, n_long, n_mac, n_nopulse, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
