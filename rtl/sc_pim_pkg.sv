`timescale 1ns/1ps
// sc_pim_pkg - constants, types and the logarithm table formula shared by the
// stochastic-computing in-memory multiplier.
//
// Default sizes: 10-bit binary operands, each product represented by 2^10
// stochastic bits (both from the evaluation setup of the design), a DTC time
// step of 22 ps, and a write current of 81 uA against a critical current of
// 80 uA with thermal stability 60.9.  The array geometry (128 columns, 8 rows
// per product, 128 products) is this implementation's choice.
//
// The write-pulse code for an operand X of N bits is
//     code(X) = round( S * log2(2^N / X) ),  code(0) = all ones,
// where S is the number of DTC steps that halve the probability that a cell
// survives the pulse.  With survival exp(-k*tau), k = exp(-Delta*(1-I/Ic)) per
// ns and a step of t_res ns, S = ln2 / (k * t_res) = 14.716 at the defaults,
// held here as 3767/256.
package sc_pim_pkg;

  localparam int unsigned OP_BITS        = 10;    // binary operand width
  localparam int unsigned NBIT           = 1024;  // stochastic bits per product
  localparam int unsigned COLS           = 128;   // cells per cross-point row
  localparam int unsigned ROWS_PER_MUL   = NBIT / COLS;
  localparam int unsigned GROUPS         = 128;   // products held in the array
  localparam int unsigned CODE_W         = 8;     // DTC input code width
  localparam int unsigned T_RES_PS       = 22;    // DTC time resolution
  localparam int unsigned STEPS_PER_OCT_Q8 = 3767; // S in 1/256 steps
  localparam int unsigned LOG_FB         = 16;    // fraction bits of the log2 evaluation

  // Pop-count strategy selected for an operation.
  typedef enum logic {
    POP_APC = 1'b0,   // one-cycle parallel counter after every product
    POP_CSA = 1'b1    // row-wise carry-save sum, then column-wise full adder
  } pop_mode_e;

  // Operation requested from the engine.
  typedef enum logic [1:0] {
    OP_MAC     = 2'd0,  // preset, pulse x, pulse w, count: sum of x*w
    OP_LOAD_W  = 2'd1,  // preset, pulse w: store w as stochastic bits, no count
    OP_MAC_PRE = 2'd2   // pulse x onto groups loaded by OP_LOAD_W, count
  } mac_op_e;

  // round(s_q8/256 * log2(2^n / x)), saturated at 2^code_w - 2; x = 0 gives
  // 2^code_w - 1, the longest pulse.  log2 is evaluated with integers only:
  // the mantissa is squared repeatedly and each overflow past 2 yields the next
  // fraction bit.
  function automatic int unsigned pulse_code(int unsigned x, int unsigned n,
                                             int unsigned s_q8, int unsigned code_w);
    longint unsigned m, frac, val, maxc;
    int unsigned e;
    maxc = (64'd1 << code_w) - 64'd1;
    if (x == 0) return int'(maxc);
    e = 0;
    for (int unsigned i = 0; i < 31; i++)
      if (((x >> i) & 1) != 0) e = i;
    m = longint'(x) << (30 - e);          // Q30 mantissa in [1,2)
    frac = 0;
    for (int i = 0; i < LOG_FB; i++) begin
      m = (m * m) >> 30;
      frac = frac << 1;
      if (m >= (64'd1 << 31)) begin
        m = m >> 1;
        frac = frac | 64'd1;
      end
    end
    val = (64'(n - e) << LOG_FB) - frac;            // -log2(x/2^n), Q16
    val = (val * s_q8 + (64'd1 << (LOG_FB + 7))) >> (LOG_FB + 8);
    if (val > maxc - 64'd1) val = maxc - 64'd1;
    return int'(val);
  endfunction

endpackage
