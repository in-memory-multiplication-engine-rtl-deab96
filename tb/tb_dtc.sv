`timescale 1ns/1ps
// tb_dtc - triggers the converter with a range of codes and measures the width
// of the write pulse (code * 22 ps), the busy window around it and that no
// pulse is produced without a trigger or for code 0.
module tb_dtc;
  localparam int unsigned CODE_BW = 8, T_RES_PS = 22;

  logic               clk = 1'b0;
  logic               trig;
  logic [CODE_BW-1:0] code;
  logic               v_t, busy;
  realtime            t_up, t_dn;
  int                 pulses = 0;

  int checks = 0, failures = 0;

  dtc dut (.clk, .trig, .code, .v_t, .busy);

  always #0.5 clk = ~clk;

  always @(posedge v_t) begin t_up = $realtime; pulses++; end
  always @(negedge v_t) t_dn = $realtime;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fire(input int c);
    int p0;
    real w_ps;
    p0 = pulses;
    @(negedge clk);
    trig = 1; code = CODE_BW'(c);
    @(negedge clk);
    trig = 0; code = '0;
    checks++;
    if (c * T_RES_PS > 500 && !busy) failures++;  // busy spans the pulse
    wait (!busy);
    @(negedge clk);
    checks++;
    if (c == 0) begin
      if (pulses != p0) failures++;
    end else begin
      w_ps = (t_dn - t_up) / 1ps;
      if (pulses != p0 + 1 || w_ps < real'(c * T_RES_PS) - 0.5 || w_ps > real'(c * T_RES_PS) + 0.5) begin
        failures++;
        $display("code %0d width %f ps", c, w_ps);
      end
    end
  endtask

  initial begin
    int p0;
    trig = 0; code = '0;
    repeat (3) @(negedge clk);
    fire(1); fire(14); fire(45); fire(147); fire(255); fire(0);
    for (int k = 0; k < 20; k++) fire($urandom_range(255));
    // no trigger, no pulse
    p0 = pulses;
    code = 8'd100;
    repeat (10) @(negedge clk);
    checks++;
    if (pulses != p0 || v_t) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
