`timescale 1ns/1ps
// dtc - digital-to-time converter, behavioural model.
//
// This is a behavioural model of a mixed-signal part, not synthesizable logic:
// the real converter is a delay-line circuit with a 22 ps step, which no clocked
// logic reproduces.  On a clock edge where trig is high it samples code and
// drives the write pulse v_t high for code * T_RES_PS picoseconds (no pulse for
// code 0).  busy rises with the edge (seen by logic from the next edge on) and
// falls with the end of the pulse, so a controller must ignore busy for one
// cycle after trig.  The pulse magnitude is fixed; only its width carries the
// operand.  Ports and the 22 ps step follow the design; the trig/busy handshake
// is this model's choice.  A synthesis tool that reads this model anyway turns
// the delayed assignments into latches; that is expected of a timing model and
// is why the model is not meant for synthesis.
module dtc #(
  parameter int unsigned CODE_BW  = 8,
  parameter int unsigned T_RES_PS = 22
) (
  input  logic               clk,
  input  logic               trig,
  input  logic [CODE_BW-1:0] code,
  output logic               v_t,
  output logic               busy
);

  initial begin
    v_t  = 1'b0;
    busy = 1'b0;
  end

  always begin
    int unsigned width_ps;
    @(posedge clk);
    if (trig && !busy) begin
      width_ps = int'(code) * T_RES_PS;
      busy <= 1'b1;
      if (width_ps != 0) begin
        v_t = 1'b1;
        #(width_ps * 1ps);
        v_t = 1'b0;
      end else begin
        #0;
      end
      busy <= 1'b0;
    end
  end

endmodule
