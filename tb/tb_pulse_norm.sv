`timescale 1ns/1ps
// tb_pulse_norm - checks the pulse-code normalization exhaustively over all
// 256 codes for the unit scale, for corner scales (0, 0.5, 1.5, the largest)
// and for 60 random scales.  The reference rounds code * scale / 256 in real
// arithmetic, clips at 255 and keeps code 255 at 255.  The unit is
// combinational, so each output is checked 1 ns after its inputs are set.
module tb_pulse_norm;
  localparam int unsigned CODE_BW = 8, SCALE_W = 10;  // the unit's defaults

  logic [CODE_BW-1:0] code_in, code_out;
  logic [SCALE_W-1:0] scale;

  int checks = 0, failures = 0;

  pulse_norm dut (
    .code_in, .scale, .code_out
  );

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_norm(int c, int s);
    int q;
    if (c == 255) return 255;
    q = int'($floor(real'(c) * real'(s) / 256.0 + 0.5));
    return (q > 255) ? 255 : q;
  endfunction

  task automatic sweep(input int s);
    for (int c = 0; c < 256; c++) begin
      code_in = CODE_BW'(c);
      scale   = SCALE_W'(s);
      #1;
      checks++;
      if (int'(code_out) != ref_norm(c, s)) begin
        failures++;
        $display("code %0d scale %0d: got %0d expected %0d", c, s, code_out, ref_norm(c, s));
      end
    end
  endtask

  initial begin
    code_in = '0;
    scale   = '0;
    #1;
    sweep(256);
    sweep(0);
    sweep(128);
    sweep(384);
    sweep(1023);
    repeat (60) sweep(int'($urandom % 1024));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
