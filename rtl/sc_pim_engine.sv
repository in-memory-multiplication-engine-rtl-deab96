`timescale 1ns/1ps
// sc_pim_engine - in-memory stochastic multiply-accumulate engine (top level).
//
// Multiplies pairs of binary operands by letting magnetic memory cells switch
// at random: a group of NBIT cells is preset to 1, then hit by a write pulse
// whose width encodes -log(x), then by one encoding -log(w).  A cell survives
// both with probability (x/2^N)*(w/2^N), so the number of ones left in the
// group, counted by a pop-count, is about NBIT * x * w / 2^(2N) - with the
// defaults, x*w/1024.  The engine accumulates that count over num_mul pairs.
//
// Blocks: operand_mem (binary operands), ln_lut (operand to pulse code),
// pulse_norm (run-time pulse scale), dtc (code to pulse width, behavioural),
// sot_mram_xpoint (the stochastic array, behavioural), apc (one-cycle
// pop-count per product), csa_popcount (row-wise carry-save then column-wise
// full-adder pop-count over all products), and sc_controller.  mode picks the
// pop-count strategy per operation.
//
// Interface: load pairs through op_we/op_waddr/op_wx/op_ww; pulse start with
// num_mul, mode and op while busy is low (op OP_MAC multiplies and accumulates;
// OP_LOAD_W stores the weights w as stochastic bits; OP_MAC_PRE then applies
// only the x pulses to them and accumulates); done pulses one cycle with result valid;
// cycles gives the operation's length in clock cycles.  The clock is the
// memory cycle; pulse widths are in absolute time (22 ps steps), so a pulse
// takes as many cycles as its width needs.  v_t is brought out for observation.
// norm_scale (unsigned, 256 = 1.0) stretches or shortens every pulse through
// pulse_norm, to match the table to the cells' actual switching rate; hold it
// stable during an operation.
// SIGMA_IC (default 0) is the relative spread of the cells' critical current,
// passed to the array model for variation studies.
module sc_pim_engine
  import sc_pim_pkg::*;
#(
  parameter int unsigned N            = OP_BITS,
  parameter int unsigned COLS_P       = COLS,
  parameter int unsigned ROWS_P       = ROWS_PER_MUL,
  parameter int unsigned GROUPS_P     = GROUPS,
  parameter int unsigned CODE_BW      = CODE_W,
  parameter int unsigned S_Q8         = STEPS_PER_OCT_Q8,
  parameter int unsigned T_RES        = T_RES_PS,
  parameter real         SIGMA_IC     = 0.0,
  parameter int unsigned NORM_W       = 10,
  localparam int unsigned GW          = $clog2(GROUPS_P),
  localparam int unsigned NB          = ROWS_P * COLS_P,
  localparam int unsigned APC_W       = $clog2(NB + 1),
  localparam int unsigned RES_W       = $clog2(GROUPS_P * NB + 1),
  localparam int unsigned CNT_W       = $clog2(GROUPS_P * ROWS_P + 1),
  localparam int unsigned RW          = (ROWS_P > 1) ? $clog2(ROWS_P) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // operand loading
  input  logic             op_we,
  input  logic [GW-1:0]    op_waddr,
  input  logic [N-1:0]     op_wx,
  input  logic [N-1:0]     op_ww,
  // command and result
  input  logic             start,
  input  logic [GW:0]      num_mul,
  input  pop_mode_e        mode,
  input  mac_op_e          op,
  input  logic [NORM_W-1:0] norm_scale,
  output logic             busy,
  output logic             done,
  output logic [RES_W-1:0] result,
  output logic [31:0]      cycles,
  output logic             v_t
);

  logic               om_re;
  logic [GW-1:0]      om_raddr;
  logic [N-1:0]       om_x, om_w;
  logic               lut_rd_en;
  logic [N-1:0]       lut_addr;
  logic [CODE_BW-1:0] lut_raw, lut_code;
  logic               dtc_trig, dtc_busy;
  logic [CODE_BW-1:0] dtc_code;
  logic               preset;
  logic [GW-1:0]      wr_group, rd_group;
  logic [RW-1:0]      rd_row;
  logic [NB-1:0]      rd_bits;
  logic               apc_valid, apc_out_valid;
  logic [APC_W-1:0]   apc_count;
  logic               csa_clear, csa_row_valid, csa_fa_start, csa_sum_valid;
  logic [RES_W-1:0]   csa_sum;

  operand_mem #(.N(N), .DEPTH(GROUPS_P)) u_opmem (
    .clk, .we(op_we), .waddr(op_waddr), .wx(op_wx), .ww(op_ww),
    .re(om_re), .raddr(om_raddr), .rx(om_x), .rw(om_w)
  );

  ln_lut #(.N(N), .CODE_BW(CODE_BW), .S_Q8(S_Q8)) u_lut (
    .clk, .rd_en(lut_rd_en), .addr(lut_addr), .code(lut_raw)
  );

  pulse_norm #(.CODE_BW(CODE_BW), .SCALE_W(NORM_W), .FRAC(8)) u_norm (
    .code_in(lut_raw), .scale(norm_scale), .code_out(lut_code)
  );

  dtc #(.CODE_BW(CODE_BW), .T_RES_PS(T_RES)) u_dtc (
    .clk, .trig(dtc_trig), .code(dtc_code), .v_t, .busy(dtc_busy)
  );

  sot_mram_xpoint #(.ROWS_PER_MUL(ROWS_P), .COLS(COLS_P), .GROUPS(GROUPS_P),
                    .SIGMA_IC(SIGMA_IC)) u_array (
    .clk, .preset, .wr_group, .v_t, .rd_group, .rd_bits
  );

  apc #(.NB(NB)) u_apc (
    .clk, .rst_n, .in_valid(apc_valid), .bits(rd_bits),
    .out_valid(apc_out_valid), .count(apc_count)
  );

  csa_popcount #(.COLS(COLS_P), .CNT_W(CNT_W), .OUT_W(RES_W)) u_csa (
    .clk, .rst_n, .clear(csa_clear), .row_valid(csa_row_valid),
    .row(rd_bits[rd_row*COLS_P +: COLS_P]), .fa_start(csa_fa_start),
    .busy(), .sum_valid(csa_sum_valid), .sum(csa_sum)
  );

  sc_controller #(
    .N(N), .NGROUPS(GROUPS_P), .NROWS(ROWS_P), .CODE_BW(CODE_BW),
    .RES_W(RES_W), .APC_W(APC_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .num_mul, .mode, .op, .busy, .done, .result, .cycles,
    .om_re, .om_raddr, .om_x, .om_w,
    .lut_rd_en, .lut_addr, .lut_code,
    .dtc_trig, .dtc_code, .dtc_busy,
    .preset, .wr_group, .rd_group, .rd_row,
    .apc_valid, .apc_out_valid, .apc_count,
    .csa_clear, .csa_row_valid, .csa_fa_start, .csa_sum_valid, .csa_sum
  );

endmodule
