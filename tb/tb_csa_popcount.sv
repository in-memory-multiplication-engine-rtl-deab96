`timescale 1ns/1ps
// tb_csa_popcount - feeds batches of random rows (one per cycle), starts the
// column-wise sum and checks the total against a loop count, that sum_valid
// comes COLS+1 cycles after fa_start, and that clear empties the counters.
module tb_csa_popcount;
  localparam int unsigned COLS = 128, CNT_W = 11, OUT_W = 18;

  logic             clk = 1'b0, rst_n;
  logic             clear, row_valid, fa_start, busy, sum_valid;
  logic [COLS-1:0]  row;
  logic [OUT_W-1:0] sum;

  int checks = 0, failures = 0;

  csa_popcount dut (.clk, .rst_n, .clear, .row_valid, .row, .fa_start, .busy, .sum_valid, .sum);

  always #0.5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic batch(input int nrows, input int dens);
    int ref_n, lat;
    ref_n = 0;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int r = 0; r < nrows; r++) begin
      for (int c = 0; c < COLS; c++) row[c] = ($urandom_range(99) < dens);
      for (int c = 0; c < COLS; c++) ref_n += int'(row[c]);
      row_valid = 1;
      @(negedge clk);
    end
    row_valid = 0; row = '1;                 // not added
    fa_start = 1;
    @(negedge clk);
    fa_start = 0;
    lat = 1;
    while (!sum_valid && lat < 10 * COLS) begin
      @(negedge clk);
      lat++;
    end
    checks++;
    if (int'(sum) != ref_n) begin
      failures++;
      $display("rows %0d sum %0d ref %0d", nrows, sum, ref_n);
    end
    checks++;
    if (lat != COLS + 1) begin
      failures++;
      $display("latency %0d", lat);
    end
  endtask

  initial begin
    rst_n = 0; clear = 0; row_valid = 0; fa_start = 0; row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    batch(1, 50);
    batch(8, 30);
    batch(800, 25);
    batch(1024, 100);    // every cell one: the largest count
    batch(37, 0);
    batch(100, 70);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
