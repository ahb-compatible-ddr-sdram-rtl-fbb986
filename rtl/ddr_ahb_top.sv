// ddr_ahb_top: AHB-compatible DDR SDRAM controller core.
//
// An AHB slave in front of a DDR SDRAM controller for a x16 DDR device with
// four banks. The controller opens a row for every access and closes it with
// auto precharge, so each 64-bit AHB beat costs a fixed number of clocks
// regardless of address: the controller trades peak bandwidth for simple,
// address-independent timing suited to random access.
//
//   ahb_slave        AHB transfers (wait-state writes, split reads)
//                    -> sys_adsn / sys_r_wn / sys_a / data
//   ddr_ctrl         INIT_FSM + CMD_FSM + clock counter -> istate, cstate
//   refresh_counter  periodic sys_ref_req, dropped on sys_ref_ack
//   sig_gen          istate/cstate -> CS#, CKE, RAS#, CAS#, WE#, A, BA
//   data_path        64-bit system word <-> four 16-bit DDR words on DQ
//
// Clocks: sys_clk, and sys_clk2x at twice its frequency with rising edges
// aligned to those of sys_clk (both come from a clock generator outside this
// core; the DDR device clock CK/CK# is taken from sys_clk outside the core as
// well). sys_reset is asynchronous and active high. sys_dly_200us goes high
// once the 200 us power-up delay has passed.
//
// AHB: the slave signals (HSEL, HADDR, HTRANS, HWRITE, HWDATA, HREADY in;
// HREADYOUT, HRESP, HRDATA out) plus HMASTER in and HSPLIT out for split
// transactions; every read is split and completed by the master's retry
// after its HSPLIT bit pulses.
//
// DDR pins: command and address outputs are registered on sys_clk; DQ and
// DQS are given as output, output enable and input, to be joined in the pad
// ring. sys_init_done, sys_ref_ack and sys_cyc_end are brought out for
// observation.
//
// The partition follows the paper's top module and functional block diagram.
// The refresh counter as a separate block, the AHB slave's insides, the
// DDR-266 timing values and the split buses are this design's choices.
module ddr_ahb_top
  import ddr_pkg::*;
#(
  parameter int unsigned HADDR_W      = 32,
  parameter int unsigned REF_INTERVAL = 780,
  parameter int unsigned NUM_CLK_TRP  = ddr_pkg::DEF_NUM_CLK_TRP,
  parameter int unsigned NUM_CLK_TRFC = ddr_pkg::DEF_NUM_CLK_TRFC,
  parameter int unsigned NUM_CLK_TMRD = ddr_pkg::DEF_NUM_CLK_TMRD,
  parameter int unsigned NUM_CLK_TRCD = ddr_pkg::DEF_NUM_CLK_TRCD,
  parameter int unsigned NUM_CLK_TDAL = ddr_pkg::DEF_NUM_CLK_TDAL
) (
  input  logic               sys_clk,
  input  logic               sys_clk2x,
  input  logic               sys_reset,
  input  logic               sys_dly_200us,
  // AHB slave port
  input  logic               hsel,
  input  logic [HADDR_W-1:0] haddr,
  input  logic [1:0]         htrans,
  input  logic               hwrite,
  input  logic [DEF_SYS_DW-1:0]  hwdata,
  input  logic               hready,
  input  logic [3:0]         hmaster,
  output logic               hreadyout,
  output logic [1:0]         hresp,
  output logic [DEF_SYS_DW-1:0]  hrdata,
  output logic [15:0]        hsplit,
  // status
  output logic               sys_init_done,
  output logic               sys_ref_ack,
  output logic               sys_cyc_end,
  // DDR SDRAM
  output logic               ddr_csn,
  output logic               ddr_cke,
  output logic               ddr_rasn,
  output logic               ddr_casn,
  output logic               ddr_wen,
  output logic [DEF_DDR_AW-1:0]  ddr_add,
  output logic [DEF_BA_W-1:0]    ddr_ba,
  output logic [DEF_DQ_W-1:0]    ddr_dq_o,
  output logic               ddr_dq_oe,
  input  logic [DEF_DQ_W-1:0]    ddr_dq_i,
  output logic               ddr_dqs_o,
  output logic               ddr_dqs_oe
);

  localparam int unsigned CNT_W = 32;

  logic [DEF_SYS_AW-1:0] sys_a;
  logic              sys_adsn, sys_r_wn, sys_ref_req, sys_d_valid, load_mrs_done;
  logic [DEF_SYS_DW-1:0] sys_wdata, sys_rdata;
  istate_t           istate;
  cstate_t           cstate;
  logic [CNT_W-1:0]  clk_cnt;

  ahb_slave #(.HADDR_W(HADDR_W)) u_ahb_slave (
    .hclk(sys_clk), .reset(sys_reset),
    .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite), .hwdata(hwdata),
    .hready(hready), .hmaster(hmaster), .hreadyout(hreadyout), .hresp(hresp),
    .hrdata(hrdata), .hsplit(hsplit),
    .sys_a(sys_a), .sys_adsn(sys_adsn), .sys_r_wn(sys_r_wn), .sys_wdata(sys_wdata),
    .cstate(cstate), .sys_cyc_end(sys_cyc_end), .sys_rdata(sys_rdata),
    .sys_d_valid(sys_d_valid)
  );

  ddr_ctrl #(
    .CNT_W(CNT_W), .NUM_CLK_TRP(NUM_CLK_TRP), .NUM_CLK_TRFC(NUM_CLK_TRFC),
    .NUM_CLK_TMRD(NUM_CLK_TMRD), .NUM_CLK_TRCD(NUM_CLK_TRCD), .NUM_CLK_CL(DEF_CAS_LAT),
    .NUM_CLK_TDAL(NUM_CLK_TDAL), .BURST_LEN(DEF_BURST_LEN)
  ) u_ddr_ctrl (
    .sys_clk(sys_clk), .sys_reset(sys_reset), .sys_dly_200us(sys_dly_200us),
    .sys_adsn(sys_adsn), .sys_r_wn(sys_r_wn), .sys_ref_req(sys_ref_req),
    .sys_init_done(sys_init_done), .sys_ref_ack(sys_ref_ack), .sys_cyc_end(sys_cyc_end),
    .istate(istate), .cstate(cstate), .clk_cnt(clk_cnt), .load_mrs_done(load_mrs_done)
  );

  refresh_counter #(.REF_INTERVAL(REF_INTERVAL)) u_refresh_counter (
    .clk(sys_clk), .reset(sys_reset), .enable(sys_init_done), .ref_ack(sys_ref_ack),
    .ref_req(sys_ref_req)
  );

  sig_gen #(.BURST_LEN(DEF_BURST_LEN), .CAS_LAT(DEF_CAS_LAT)) u_sig_gen (
    .clk(sys_clk), .reset(sys_reset), .istate(istate), .cstate(cstate),
    .load_mrs_done(load_mrs_done), .sys_a(sys_a),
    .ddr_csn(ddr_csn), .ddr_cke(ddr_cke), .ddr_rasn(ddr_rasn), .ddr_casn(ddr_casn),
    .ddr_wen(ddr_wen), .ddr_add(ddr_add), .ddr_ba(ddr_ba)
  );

  data_path #(.CNT_W(CNT_W), .BURST_LEN(DEF_BURST_LEN)) u_data_path (
    .clk(sys_clk), .clk2x(sys_clk2x), .reset(sys_reset), .istate(istate), .cstate(cstate),
    .clk_cnt(clk_cnt), .sys_wdata(sys_wdata), .sys_rdata(sys_rdata),
    .sys_d_valid(sys_d_valid), .dq_o(ddr_dq_o), .dq_oe(ddr_dq_oe), .dq_i(ddr_dq_i),
    .dqs_o(ddr_dqs_o), .dqs_oe(ddr_dqs_oe)
  );

endmodule
