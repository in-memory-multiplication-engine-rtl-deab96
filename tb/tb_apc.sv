`timescale 1ns/1ps
// tb_apc - random and corner bit vectors of 1024 bits; the registered count must
// equal a loop count one cycle after in_valid, and hold otherwise.
module tb_apc;
  localparam int unsigned NB = 1024, CW = $clog2(NB + 1);

  logic          clk = 1'b0, rst_n;
  logic          in_valid, out_valid;
  logic [NB-1:0] bits;
  logic [CW-1:0] count;

  int checks = 0, failures = 0;

  apc dut (.clk, .rst_n, .in_valid, .bits, .out_valid, .count);

  always #0.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [NB-1:0] v);
    int ref_n;
    ref_n = 0;
    for (int i = 0; i < NB; i++) ref_n += int'(v[i]);
    @(negedge clk);
    bits = v; in_valid = 1;
    @(negedge clk);
    in_valid = 0; bits = ~v;
    checks++;
    if (!out_valid || int'(count) != ref_n) begin
      failures++;
      $display("count %0d ref %0d", count, ref_n);
    end
    @(negedge clk);
    checks++;
    if (out_valid || int'(count) != ref_n) failures++;
  endtask

  initial begin
    logic [NB-1:0] v;
    rst_n = 0; in_valid = 0; bits = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one('0); one('1); one({NB{1'b0}} | 1); one({1'b1, {(NB-1){1'b0}}});
    for (int k = 0; k < 200; k++) begin
      int dens;
      dens = $urandom_range(100);
      for (int i = 0; i < NB; i++) v[i] = ($urandom_range(99) < dens);
      one(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
