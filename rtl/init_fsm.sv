// init_fsm: DDR SDRAM power-up initialization state machine (INIT_FSM).
//
// After reset the machine waits in i_IDLE until sys_dly_200us reports that the
// 200 us power/clock stabilization time has passed. It then walks through
//   NOP, PRECHARGE ALL, (tRP), LOAD MODE (extended register, DLL enable),
//   (tMRD), LOAD MODE (mode register, DLL reset), (tMRD), PRECHARGE ALL,
//   (tRP), AUTO REFRESH, (tRFC), AUTO REFRESH, (tRFC), LOAD MODE (mode
//   register, normal operation), (tMRD)
// and parks in i_ready with sys_init_done high until the next reset.
// Two flags steer the shared states: load_mrs_done is set when the first
// LOAD MODE to the mode register is issued, load_mrs_af once the second AUTO
// REFRESH is issued; i_PRE, i_tMRD and i_MRS branch on them. A wait state
// (i_tRP, i_tMRD, i_tRFC1/2) lasts NUM_CLK_x clocks, measured with the
// shared clock counter (clk_cnt, cleared through sync_reset_cnt on every
// state change); if NUM_CLK_x is 0 the wait state is skipped.
//
// Interface: clk, reset (async, active high), sys_dly_200us, clk_cnt in;
// istate, sys_init_done, load_mrs_done, load_mrs_af, sync_reset_cnt out.
// Timing: istate is a register; sync_reset_cnt is combinational from it.
//
// Follows the paper's state diagram (Fig. 5) and command order (Sec. 4.1).
// Own choices: state codes, and load_mrs_af being set when leaving i_AR2
// (the figure marks it in i_tRFC2; setting it one state earlier also covers
// the path that skips i_tRFC2 and changes nothing else).
//
// The assertions are disabled during reset ('disable iff (reset)'); lint
// therefore reports reset as used both as an asynchronous reset and as
// logic, which is intended.
module init_fsm
  import ddr_pkg::*;
#(
  parameter int unsigned CNT_W        = 32,
  parameter int unsigned NUM_CLK_TRP  = ddr_pkg::DEF_NUM_CLK_TRP,
  parameter int unsigned NUM_CLK_TRFC = ddr_pkg::DEF_NUM_CLK_TRFC,
  parameter int unsigned NUM_CLK_TMRD = ddr_pkg::DEF_NUM_CLK_TMRD
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             sys_dly_200us,
  input  logic [CNT_W-1:0] clk_cnt,
  output istate_t          istate,
  output logic             sys_init_done,
  output logic             load_mrs_done,
  output logic             load_mrs_af,
  output logic             sync_reset_cnt
);

  istate_t istate_nxt;

  // A wait state of n clocks ends in the clock where the counter reads n-1.
  function automatic logic end_of(input logic [CNT_W-1:0] cnt, input int unsigned n);
    return (n == 0) || (cnt >= CNT_W'(n - 1));
  endfunction

  logic end_trp, end_trfc, end_tmrd;
  assign end_trp  = end_of(clk_cnt, NUM_CLK_TRP);
  assign end_trfc = end_of(clk_cnt, NUM_CLK_TRFC);
  assign end_tmrd = end_of(clk_cnt, NUM_CLK_TMRD);

  // Where to go once tMRD has passed after a LOAD MODE command.
  function automatic istate_t after_lmr(input logic mrs_done, input logic mrs_af);
    if (!mrs_done)    return I_MRS;
    else if (!mrs_af) return I_PRE;
    else              return I_READY;
  endfunction

  always_comb begin
    istate_nxt = istate;
    unique case (istate)
      I_IDLE:  if (sys_dly_200us) istate_nxt = I_NOP;
      I_NOP:   istate_nxt = I_PRE;
      I_PRE:   if (NUM_CLK_TRP != 0)  istate_nxt = I_TRP;
               else if (load_mrs_done) istate_nxt = I_AR1;
               else                    istate_nxt = I_EMRS;
      I_TRP:   if (end_trp) istate_nxt = load_mrs_done ? I_AR1 : I_EMRS;
      I_EMRS:  istate_nxt = (NUM_CLK_TMRD != 0) ? I_TMRD : I_MRS;
      I_TMRD:  if (end_tmrd) istate_nxt = after_lmr(load_mrs_done, load_mrs_af);
      // In i_MRS the flag load_mrs_done is being set by this very command.
      I_MRS:   istate_nxt = (NUM_CLK_TMRD != 0) ? I_TMRD : after_lmr(1'b1, load_mrs_af);
      I_AR1:   istate_nxt = (NUM_CLK_TRFC != 0) ? I_TRFC1 : I_AR2;
      I_TRFC1: if (end_trfc) istate_nxt = I_AR2;
      I_AR2:   istate_nxt = (NUM_CLK_TRFC != 0) ? I_TRFC2 : I_MRS;
      I_TRFC2: if (end_trfc) istate_nxt = I_MRS;
      I_READY: istate_nxt = I_READY;
      default: istate_nxt = I_IDLE;
    endcase
  end

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      istate        <= I_IDLE;
      load_mrs_done <= 1'b0;
      load_mrs_af   <= 1'b0;
    end else begin
      istate <= istate_nxt;
      if (istate == I_MRS) load_mrs_done <= 1'b1;
      if (istate == I_AR2) load_mrs_af   <= 1'b1;
    end
  end

  assign sync_reset_cnt = (istate_nxt != istate);
  assign sys_init_done  = (istate == I_READY);

  // Once ready, the machine never leaves i_ready without a reset.
  a_ready_sticky: assert property (@(posedge clk) disable iff (reset)
                                   istate == I_READY |=> istate == I_READY);

endmodule
