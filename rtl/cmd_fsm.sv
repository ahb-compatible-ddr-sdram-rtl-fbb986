// cmd_fsm: DDR SDRAM command state machine (CMD_FSM).
//
// Runs the read, write and refresh cycles once initialization is done.
// In c_idle, with sys_init_done high, a high sys_ref_req starts a refresh
// (c_AR, then c_tRFC) and otherwise a low sys_adsn starts an access; refresh
// wins when both are present. Every access opens its row (c_ACTIVE, then
// c_tRCD) and ends with an auto-precharged READA or WRITEA, so the length of
// a cycle is fixed and any address may follow any other:
//   read : c_ACTIVE, c_tRCD, c_READA, c_cl (CAS latency), c_rdata, c_idle
//   write: c_ACTIVE, c_tRCD, c_WRITEA, c_wdata, c_tDAL, c_idle
// sys_r_wn is sampled in the last clock before c_READA/c_WRITEA. Each wait
// state lasts NUM_CLK_x clocks, measured with the shared clock counter; a
// wait state whose count is 0 is skipped (the dashed paths of the state
// diagram). c_rdata and c_wdata last BURST_LEN/2 clocks, as two words move
// per clock on the DDR data pins.
//
// sys_ref_ack is high throughout the refresh cycle (c_AR and c_tRFC).
// sys_cyc_end is a registered one-clock pulse in the first c_idle clock after
// a read or write cycle.
//
// Interface: clk, reset (async, active high), sys_init_done, sys_adsn
// (active low), sys_r_wn (1 = read), sys_ref_req, clk_cnt in; cstate,
// sys_ref_ack, sys_cyc_end, sync_reset_cnt out.
//
// Follows the paper's state diagram (Fig. 7) and Sec. 4.2. Own choices: state
// codes, the data states lasting BURST_LEN/2 clocks (the paper's timing
// figures show single data rate, one word per clock), and the exact timing of
// sys_cyc_end.
//
// The assertions are disabled during reset ('disable iff (reset)'); lint
// therefore reports reset as used both as an asynchronous reset and as
// logic, which is intended.
module cmd_fsm
  import ddr_pkg::*;
#(
  parameter int unsigned CNT_W         = 32,
  parameter int unsigned NUM_CLK_TRFC  = ddr_pkg::DEF_NUM_CLK_TRFC,
  parameter int unsigned NUM_CLK_TRCD  = ddr_pkg::DEF_NUM_CLK_TRCD,
  parameter int unsigned NUM_CLK_CL    = ddr_pkg::DEF_CAS_LAT,
  parameter int unsigned NUM_CLK_TDAL  = ddr_pkg::DEF_NUM_CLK_TDAL,
  parameter int unsigned BURST_LEN     = ddr_pkg::DEF_BURST_LEN
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             sys_init_done,
  input  logic             sys_adsn,
  input  logic             sys_r_wn,
  input  logic             sys_ref_req,
  input  logic [CNT_W-1:0] clk_cnt,
  output cstate_t          cstate,
  output logic             sys_ref_ack,
  output logic             sys_cyc_end,
  output logic             sync_reset_cnt
);

  localparam int unsigned NUM_CLK_BURST = BURST_LEN / 2;

  cstate_t cstate_nxt;

  function automatic logic end_of(input logic [CNT_W-1:0] cnt, input int unsigned n);
    return (n == 0) || (cnt >= CNT_W'(n - 1));
  endfunction

  logic end_trfc, end_trcd, end_cl, end_burst, end_tdal;
  assign end_trfc  = end_of(clk_cnt, NUM_CLK_TRFC);
  assign end_trcd  = end_of(clk_cnt, NUM_CLK_TRCD);
  assign end_cl    = end_of(clk_cnt, NUM_CLK_CL);
  assign end_burst = end_of(clk_cnt, NUM_CLK_BURST);
  assign end_tdal  = end_of(clk_cnt, NUM_CLK_TDAL);

  always_comb begin
    cstate_nxt = cstate;
    unique case (cstate)
      C_IDLE:   if (sys_init_done) begin
                  if (sys_ref_req)    cstate_nxt = C_AR;
                  else if (!sys_adsn) cstate_nxt = C_ACTIVE;
                end
      C_AR:     cstate_nxt = (NUM_CLK_TRFC != 0) ? C_TRFC : C_IDLE;
      C_TRFC:   if (end_trfc) cstate_nxt = C_IDLE;
      C_ACTIVE: if (NUM_CLK_TRCD != 0) cstate_nxt = C_TRCD;
                else                   cstate_nxt = sys_r_wn ? C_READA : C_WRITEA;
      C_TRCD:   if (end_trcd) cstate_nxt = sys_r_wn ? C_READA : C_WRITEA;
      C_READA:  cstate_nxt = C_CL;
      C_CL:     if (end_cl) cstate_nxt = C_RDATA;
      C_RDATA:  if (end_burst) cstate_nxt = C_IDLE;
      C_WRITEA: cstate_nxt = C_WDATA;
      C_WDATA:  if (end_burst) cstate_nxt = (NUM_CLK_TDAL != 0) ? C_TDAL : C_IDLE;
      C_TDAL:   if (end_tdal) cstate_nxt = C_IDLE;
      default:  cstate_nxt = C_IDLE;
    endcase
  end

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      cstate      <= C_IDLE;
      sys_cyc_end <= 1'b0;
    end else begin
      cstate      <= cstate_nxt;
      sys_cyc_end <= (cstate == C_RDATA || cstate == C_WDATA || cstate == C_TDAL)
                     && cstate_nxt == C_IDLE;
    end
  end

  assign sync_reset_cnt = (cstate_nxt != cstate);
  assign sys_ref_ack    = (cstate == C_AR) || (cstate == C_TRFC);

  // No access may start before initialization has completed.
  a_no_cycle_before_init: assert property (@(posedge clk) disable iff (reset)
                                           !sys_init_done |-> cstate == C_IDLE);

endmodule
