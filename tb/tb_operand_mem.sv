`timescale 1ns/1ps
// tb_operand_mem - writes random operand pairs to every word, reads them back
// in a shuffled order and checks data and the one-cycle read latency.
module tb_operand_mem;
  localparam int unsigned N = 10, DEPTH = 128, AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  logic [N-1:0]  wx, ww, rx, rw;
  logic [N-1:0]  mx [DEPTH];
  logic [N-1:0]  mw [DEPTH];

  int checks = 0, failures = 0;

  operand_mem dut (.clk, .we, .waddr, .wx, .ww, .re, .raddr, .rx, .rw);

  always #0.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wx = '0; ww = '0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      mx[i] = N'($urandom);
      mw[i] = N'($urandom);
      we = 1; waddr = AW'(i); wx = mx[i]; ww = mw[i];
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 3 * DEPTH; k++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      checks++;
      if (rx != mx[a] || rw != mw[a]) failures++;
    end
    // a write and a read of the same word in one cycle returns the old pair
    we = 1; re = 1; waddr = '0; raddr = '0; wx = ~mx[0]; ww = ~mw[0];
    @(negedge clk);
    checks++;
    if (rx != mx[0] || rw != mw[0]) failures++;
    we = 0;
    @(negedge clk);
    checks++;
    if (rx != ~mx[0] || rw != ~mw[0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
