`timescale 1ns/1ps
// tb_sot_mram_xpoint - presets groups, applies write pulses of known width and
// compares the number of cells still at 1 with the switching law
// P_usw = exp(-tau * exp(-Delta (1 - I/Ic))): one pulse, two pulses (their
// product), a long pulse (nearly all switch) and no pulse (none switch).
// Single trials are held to 5 sigma, averages over 40 trials to 5 sigma of the
// mean.  Also checks that a pulse leaves other groups alone.
module tb_sot_mram_xpoint;
  localparam int unsigned R = 8, C = 128, G = 128, GW = $clog2(G), NB = R * C;
  localparam real DELTA = 60.9, IC = 80.0, I = 81.0;

  logic          clk = 1'b0, preset, v_t;
  logic [GW-1:0] wr_group, rd_group;
  logic [NB-1:0] rd_bits;

  int checks = 0, failures = 0;

  sot_mram_xpoint dut (.clk, .preset, .wr_group, .v_t, .rd_group, .rd_bits);

  always #0.5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_keep(real tau_ns);
    return $exp(-tau_ns * $exp(-DELTA * (1.0 - I / IC)));
  endfunction

  function automatic int ones();
    int n = 0;
    for (int i = 0; i < NB; i++) n += int'(rd_bits[i]);
    return n;
  endfunction

  task automatic do_preset(input int g);
    @(negedge clk);
    preset = 1; wr_group = GW'(g);
    @(negedge clk);
    preset = 0;
  endtask

  task automatic pulse(input int g, input real tau_ns);
    @(negedge clk);
    wr_group = GW'(g);
    #0.1;
    v_t = 1;
    #(tau_ns);
    v_t = 0;
    @(negedge clk);
  endtask

  task automatic check_count(input int got, input real p, input int trials);
    real e, sd;
    e  = real'(NB) * p;
    sd = $sqrt(real'(NB) * p * (1.0 - p) / real'(trials));
    checks++;
    if ((real'(got) / real'(trials) - e) > 5.0 * sd + 0.5 ||
        (e - real'(got) / real'(trials)) > 5.0 * sd + 0.5) begin
      failures++;
      $display("mean ones %f expected %f (sd %f)", real'(got) / real'(trials), e, sd);
    end
  endtask

  initial begin
    int tot1, tot2, other;
    preset = 0; v_t = 0; wr_group = '0; rd_group = '0;
    repeat (2) @(negedge clk);
    // preset sets a whole group
    do_preset(5);
    do_preset(3);
    rd_group = 3;
    #0.1;
    checks++;
    if (ones() != NB) failures++;
    rd_group = 5;
    #0.1;
    other = ones();
    checks++;
    if (other != NB) failures++;
    // one and two pulses, single trial and averaged
    tot1 = 0; tot2 = 0;
    rd_group = 3;
    for (int t = 0; t < 40; t++) begin
      do_preset(3);
      pulse(3, 0.3);
      tot1 += ones();
      if (t == 0) check_count(ones(), p_keep(0.3), 1);
      pulse(3, 0.4);
      tot2 += ones();
      if (t == 0) check_count(ones(), p_keep(0.3) * p_keep(0.4), 1);
    end
    check_count(tot1, p_keep(0.3), 40);
    check_count(tot2, p_keep(0.3) * p_keep(0.4), 40);
    // a different width
    tot1 = 0;
    for (int t = 0; t < 40; t++) begin
      do_preset(3);
      pulse(3, 1.3);
      tot1 += ones();
    end
    check_count(tot1, p_keep(1.3), 40);
    // long pulse switches nearly all, no pulse switches none
    do_preset(3);
    pulse(3, 5.6);
    checks++;
    if (ones() > 2) failures++;
    do_preset(3);
    repeat (5) @(negedge clk);
    checks++;
    if (ones() != NB) failures++;
    // the untouched group
    rd_group = 5;
    #0.1;
    checks++;
    if (ones() != other) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
