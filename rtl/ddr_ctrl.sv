// ddr_ctrl: main control module of the DDR SDRAM controller.
//
// Holds the two state machines and the clock counter they share: INIT_FSM
// (init_fsm) brings the DDR device up after power-on and raises
// sys_init_done, after which CMD_FSM (cmd_fsm) runs read, write and refresh
// cycles on request from the system interface. Only one machine moves at a
// time (CMD_FSM waits in c_idle until initialization is done), so a single
// counter, cleared whenever either machine changes state, times the wait
// states of both. istate and cstate go to the signal generation and data
// path modules, which turn them into DDR pins.
//
// Interface (system side, as in the controller block diagram): sys_clk,
// sys_reset (async, active high), sys_dly_200us, sys_adsn (active low
// address strobe), sys_r_wn (1 = read), sys_ref_req in; sys_init_done,
// sys_ref_ack, sys_cyc_end, istate, cstate, clk_cnt and load_mrs_done out.
// All outputs change on the rising edge of sys_clk.
//
// Follows the paper's controller block diagram (Fig. 4) and the Clock Counter
// of Fig. 2. Exporting clk_cnt (used by the data path to index the burst) and
// load_mrs_done (used by signal generation to tell the DLL-reset LOAD MODE
// from the final one) are this design's choices. init_fsm's load_mrs_af
// flag is used only inside init_fsm, so lint lists that output as unused here.
module ddr_ctrl
  import ddr_pkg::*;
#(
  parameter int unsigned CNT_W        = 32,
  parameter int unsigned NUM_CLK_TRP  = ddr_pkg::DEF_NUM_CLK_TRP,
  parameter int unsigned NUM_CLK_TRFC = ddr_pkg::DEF_NUM_CLK_TRFC,
  parameter int unsigned NUM_CLK_TMRD = ddr_pkg::DEF_NUM_CLK_TMRD,
  parameter int unsigned NUM_CLK_TRCD = ddr_pkg::DEF_NUM_CLK_TRCD,
  parameter int unsigned NUM_CLK_CL   = ddr_pkg::DEF_CAS_LAT,
  parameter int unsigned NUM_CLK_TDAL = ddr_pkg::DEF_NUM_CLK_TDAL,
  parameter int unsigned BURST_LEN    = ddr_pkg::DEF_BURST_LEN
) (
  input  logic             sys_clk,
  input  logic             sys_reset,
  input  logic             sys_dly_200us,
  input  logic             sys_adsn,
  input  logic             sys_r_wn,
  input  logic             sys_ref_req,
  output logic             sys_init_done,
  output logic             sys_ref_ack,
  output logic             sys_cyc_end,
  output istate_t          istate,
  output cstate_t          cstate,
  output logic [CNT_W-1:0] clk_cnt,
  output logic             load_mrs_done
);

  logic init_sync_reset, cmd_sync_reset, load_mrs_af;

  init_fsm #(
    .CNT_W(CNT_W), .NUM_CLK_TRP(NUM_CLK_TRP), .NUM_CLK_TRFC(NUM_CLK_TRFC),
    .NUM_CLK_TMRD(NUM_CLK_TMRD)
  ) u_init_fsm (
    .clk(sys_clk), .reset(sys_reset), .sys_dly_200us(sys_dly_200us), .clk_cnt(clk_cnt),
    .istate(istate), .sys_init_done(sys_init_done), .load_mrs_done(load_mrs_done),
    .load_mrs_af(load_mrs_af), .sync_reset_cnt(init_sync_reset)
  );

  cmd_fsm #(
    .CNT_W(CNT_W), .NUM_CLK_TRFC(NUM_CLK_TRFC), .NUM_CLK_TRCD(NUM_CLK_TRCD),
    .NUM_CLK_CL(NUM_CLK_CL), .NUM_CLK_TDAL(NUM_CLK_TDAL), .BURST_LEN(BURST_LEN)
  ) u_cmd_fsm (
    .clk(sys_clk), .reset(sys_reset), .sys_init_done(sys_init_done), .sys_adsn(sys_adsn),
    .sys_r_wn(sys_r_wn), .sys_ref_req(sys_ref_req), .clk_cnt(clk_cnt), .cstate(cstate),
    .sys_ref_ack(sys_ref_ack), .sys_cyc_end(sys_cyc_end), .sync_reset_cnt(cmd_sync_reset)
  );

  clk_counter #(.CNT_W(CNT_W)) u_clk_counter (
    .clk(sys_clk), .reset(sys_reset), .sync_reset(init_sync_reset | cmd_sync_reset),
    .count(clk_cnt)
  );

endmodule
