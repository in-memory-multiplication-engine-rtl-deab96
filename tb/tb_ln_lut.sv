`timescale 1ns/1ps
// tb_ln_lut - checks every word of the logarithm table against a reference
// computed with real arithmetic: round(S * log2(2^N / x)), all ones for x = 0.
// Words whose reference lies within 0.01 of a rounding tie may differ by one.
// Also checks the one-cycle read latency and that the word holds without rd_en.
module tb_ln_lut;
  import sc_pim_pkg::*;

  localparam int unsigned N = OP_BITS;
  localparam real S = real'(STEPS_PER_OCT_Q8) / 256.0;

  logic              clk = 1'b0;
  logic              rd_en;
  logic [N-1:0]      addr;
  logic [CODE_W-1:0] code;

  int checks = 0, failures = 0;

  ln_lut dut (.clk, .rd_en, .addr, .code);

  always #0.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_code(int unsigned x, output bit tie);
    real v, fr;
    tie = 1'b0;
    if (x == 0) return (1 << CODE_W) - 1;
    v  = S * ($ln(real'(2 ** N) / real'(x)) / $ln(2.0));
    fr = v - $floor(v);
    tie = (fr > 0.49) && (fr < 0.51);
    return int'($floor(v + 0.5));
  endfunction

  initial begin
    bit tie;
    int r;
    rd_en = 1'b0;
    addr  = '0;
    @(negedge clk);
    for (int unsigned x = 0; x < 2 ** N; x++) begin
      rd_en = 1'b1;
      addr  = N'(x);
      @(negedge clk);
      r = ref_code(x, tie);
      checks++;
      if (int'(code) != r && !(tie && (int'(code) - r <= 1) && (r - int'(code) <= 1))) begin
        failures++;
        if (failures < 10) $display("x=%0d code=%0d ref=%0d", x, code, r);
      end
    end
    // hold: no read, new address, old word stays
    rd_en = 1'b0;
    addr  = N'(1);
    @(negedge clk);
    checks++;
    if (int'(code) != ref_code(2 ** N - 1, tie)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
