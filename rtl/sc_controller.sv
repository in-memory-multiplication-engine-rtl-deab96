`timescale 1ns/1ps
// sc_controller - sequencer of the stochastic multiply-accumulate.
//
// On start it computes sum_i x_i * w_i over the first num_mul operand pairs.
// For product i it: reads pair i from the operand memory; looks up the pulse
// code of x_i and presets group i of the array to all ones; fires the DTC with
// x_i's code, looking up w_i's code while that pulse runs (the overlap of table
// lookup and stochastic write); waits for the pulse; fires and waits for w_i's
// pulse.  Then, in APC mode, the product's group is pop-counted in one cycle and
// added to the result while the next product starts.  In CSA mode the products
// are left in their groups; after the last one every row of every used group is
// fed to the row-wise carry-save counter, one row per cycle, and the column-wise
// full adder produces the result.
//
// Weights can also be converted ahead of time: op OP_LOAD_W presets group i and
// applies only w_i's pulse, leaving w_i stored as stochastic bits; a later
// OP_MAC_PRE applies only x_i's pulse to that group (no preset) and counts.
// A stored weight is consumed by the multiplication that uses it.  The op code
// 3 is reserved; an assertion flags it.  done pulses for one cycle with result valid;
// cycles gives the length of the operation from start to done.
//
// Cycles per product, pulses aside: 3 for read, lookup and trigger of x, 1 for
// w's trigger, 1 guard cycle after each trigger, plus in APC mode one counting
// cycle; CSA mode adds NROWS cycles per product and COLS+1 cycles once.
// OP_LOAD_W and OP_MAC_PRE drop the second trigger, guard and wait.
// The flow (lookup, pulse of x, pulse of w, pop-count, lookup of w during x's
// pulse, deferred pop-count for accumulation, pre-converted weights) follows
// the design; the state
// encoding and handshakes are this implementation's choices.
module sc_controller
  import sc_pim_pkg::*;
#(
  parameter int unsigned N            = OP_BITS,
  parameter int unsigned NGROUPS      = GROUPS,
  parameter int unsigned NROWS        = ROWS_PER_MUL,
  parameter int unsigned CODE_BW      = CODE_W,
  parameter int unsigned RES_W        = 18,
  parameter int unsigned APC_W        = 11,
  localparam int unsigned GW          = $clog2(NGROUPS),
  localparam int unsigned RW          = (NROWS > 1) ? $clog2(NROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               start,
  input  logic [GW:0]        num_mul,
  input  pop_mode_e          mode,
  input  mac_op_e            op,
  output logic               busy,
  output logic               done,
  output logic [RES_W-1:0]   result,
  output logic [31:0]        cycles,
  // operand memory
  output logic               om_re,
  output logic [GW-1:0]      om_raddr,
  input  logic [N-1:0]       om_x,
  input  logic [N-1:0]       om_w,
  // logarithm table
  output logic               lut_rd_en,
  output logic [N-1:0]       lut_addr,
  input  logic [CODE_BW-1:0] lut_code,
  // digital-to-time converter
  output logic               dtc_trig,
  output logic [CODE_BW-1:0] dtc_code,
  input  logic               dtc_busy,
  // array
  output logic               preset,
  output logic [GW-1:0]      wr_group,
  output logic [GW-1:0]      rd_group,
  output logic [RW-1:0]      rd_row,
  // one-cycle pop-count
  output logic               apc_valid,
  input  logic               apc_out_valid,
  input  logic [APC_W-1:0]   apc_count,
  // carry-save / full-adder pop-count
  output logic               csa_clear,
  output logic               csa_row_valid,
  output logic               csa_fa_start,
  input  logic               csa_sum_valid,
  input  logic [RES_W-1:0]   csa_sum
);

  typedef enum logic [3:0] {
    S_IDLE, S_RDOP, S_LUTX, S_FIREX, S_GUARDX, S_WAITX, S_FIREY, S_GUARDY,
    S_WAITY, S_COUNT, S_DRAIN, S_CSA, S_FA, S_FAWAIT, S_DONE
  } state_e;

  state_e            state;
  pop_mode_e         mode_q;
  mac_op_e           op_q;
  logic [GW:0]       n_q;
  logic [GW:0]       idx;        // product being written
  logic [GW:0]       grp;        // group being summed in CSA mode
  logic [RW-1:0]     row;
  logic [N-1:0]      w_q;
  logic [CODE_BW-1:0] code_y;
  logic [RES_W-1:0]  acc;

  wire last_mul = (idx + 1'b1 == n_q);

  // state after a product's last pulse has ended
  function automatic state_e next_after_pulses();
    if (mode_q == POP_APC) return S_COUNT;
    if (last_mul)          return S_CSA;
    return S_RDOP;
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state  <= S_IDLE;
      mode_q <= POP_APC;
      op_q   <= OP_MAC;
      n_q    <= '0;
      idx    <= '0;
      grp    <= '0;
      row    <= '0;
      w_q    <= '0;
      code_y <= '0;
      acc    <= '0;
      result <= '0;
      cycles <= '0;
    end else begin
      if (state != S_IDLE) cycles <= cycles + 1;
      if (apc_out_valid) acc <= acc + RES_W'(apc_count);
      // leaving the last pulse of a product in CSA mode: next product or sums
      if ((state == S_WAITY || (state == S_WAITX && op_q == OP_MAC_PRE)) && !dtc_busy &&
          mode_q == POP_CSA) begin
        if (last_mul) begin
          grp <= '0;
          row <= '0;
        end else idx <= idx + 1'b1;
      end
      unique case (state)
        S_IDLE:
          if (start) begin
            mode_q <= mode;
            op_q   <= op;
            n_q    <= num_mul;
            idx    <= '0;
            acc    <= '0;
            cycles <= 32'd1;
            state  <= (num_mul == 0) ? S_DONE : S_RDOP;
          end
        S_RDOP:   state <= S_LUTX;
        S_LUTX: begin
          w_q   <= om_w;
          state <= S_FIREX;
        end
        S_FIREX:  state <= S_GUARDX;
        S_GUARDX: begin
          code_y <= lut_code;
          state  <= S_WAITX;
        end
        S_WAITX:
          if (!dtc_busy) begin
            if (op_q == OP_MAC) state <= S_FIREY;
            else if (op_q == OP_LOAD_W) begin
              if (last_mul) state <= S_DONE;
              else begin
                idx   <= idx + 1'b1;
                state <= S_RDOP;
              end
            end else state <= next_after_pulses();
          end
        S_FIREY:  state <= S_GUARDY;
        S_GUARDY: state <= S_WAITY;
        S_WAITY:  if (!dtc_busy) state <= next_after_pulses();
        S_COUNT:
          if (last_mul) state <= S_DRAIN;
          else begin
            idx   <= idx + 1'b1;
            state <= S_RDOP;
          end
        S_DRAIN: state <= S_DONE;        // last count reaches acc
        S_CSA:
          if (row == RW'(NROWS - 1)) begin
            row <= '0;
            if (grp + 1'b1 == n_q) state <= S_FA;
            else grp <= grp + 1'b1;
          end else row <= row + 1'b1;
        S_FA:     state <= S_FAWAIT;
        S_FAWAIT:
          if (csa_sum_valid) begin
            acc   <= csa_sum;
            state <= S_DONE;
          end
        S_DONE: begin
          result <= acc;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end

  always_comb begin
    busy          = (state != S_IDLE);
    om_re         = (state == S_RDOP);
    om_raddr      = idx[GW-1:0];
    lut_rd_en     = (state == S_LUTX) || (state == S_FIREX);
    lut_addr      = (state == S_LUTX && op_q != OP_LOAD_W) ? om_x : (state == S_LUTX) ? om_w : w_q;
    dtc_trig      = (state == S_FIREX) || (state == S_FIREY);
    dtc_code      = (state == S_FIREX) ? lut_code : code_y;
    preset        = (state == S_LUTX) && (op_q != OP_MAC_PRE);
    wr_group      = idx[GW-1:0];
    rd_group      = (state == S_CSA) ? grp[GW-1:0] : idx[GW-1:0];
    rd_row        = row;
    apc_valid     = (state == S_COUNT);
    csa_clear     = (state == S_IDLE) && start;
    csa_row_valid = (state == S_CSA);
    csa_fa_start  = (state == S_FA);
  end

  // handshake rules: the DTC is triggered only when idle, and a command asks
  // for no more products than the array holds and uses a defined op
  a_dtc_idle: assert property (@(posedge clk) disable iff (!rst_n)
    dtc_trig |-> !dtc_busy) else $error("DTC triggered while busy");
  a_num_mul: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> num_mul <= (GW+1)'(NGROUPS)) else $error("num_mul exceeds the array");
  a_op: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> op != mac_op_e'(2'd3)) else $error("reserved op");

  // the result register is loaded in S_DONE; done marks the cycle after
  logic done_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= (state == S_DONE);
  assign done = done_q;

endmodule
