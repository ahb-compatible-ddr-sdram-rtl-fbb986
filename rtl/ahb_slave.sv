// ahb_slave: AMBA AHB slave front end of the DDR SDRAM controller, with
// split transactions.
//
// Turns each AHB transfer into one system cycle of the controller: one 64-bit
// AHB beat is one DDR burst of four 16-bit words, at the word address
// sys_a = HADDR[24:3]. A transfer is taken in its address phase (HSEL,
// HTRANS NONSEQ or SEQ, HREADY high). What happens next depends on the
// transfer and on whether the slave is free:
//   - write, slave free: HREADYOUT is held low for the data phase while the
//     slave pulls sys_adsn low (until CMD_FSM shows c_ACTIVE), registers
//     HWDATA and waits for sys_cyc_end; then OKAY.
//   - read, slave free: the slave answers SPLIT at once (two cycles, HREADYOUT
//     low then high) and starts the DDR read for the master on HMASTER.
//     When sys_d_valid brings the word it is kept on HRDATA and HSPLIT of
//     that master pulses for one clock; the master's retry of the same read
//     is answered OKAY with no wait state and frees the slave.
//   - any transfer while the slave is busy with a read (running, or waiting
//     for its retry): SPLIT, and the master is remembered; all remembered
//     masters get an HSPLIT pulse when the slave becomes free.
// The bus is thus left to other masters for the whole DDR read. Bursts work
// beat by beat: every beat carries its own address, so HBURST needs no
// decoding, and a burst that is split is continued by the master after its
// retry. HTRANS IDLE and BUSY get a zero-wait OKAY.
//
// Interface: AHB slave signals on hclk (the controller's sys_clk) with the
// controller's active-high reset, HMASTER in and HSPLIT out (AHB 2.0, 16
// masters); controller side sys_a, sys_adsn, sys_r_wn, sys_wdata out, cstate,
// sys_cyc_end, sys_rdata, sys_d_valid in.
//
// The paper names the AHB slave and says it supports burst and split
// transfers; it gives no insides. When to split (every read, and anything
// that meets a busy slave) and the wait-state writes are this design's
// choices. A master must retry a split read with the same address, as AHB
// requires; HMASTLOCK is not looked at. Writes are always full 64-bit words
// (the DDR data mask pins are not part of the design), so narrower writes
// overwrite the whole word. HTRANS[0] and the address bits outside
// HADDR[24:3] are not used, which lint reports as unused bits.
//
// The assertions are disabled during reset ('disable iff (reset)'); lint
// therefore reports reset as used both as an asynchronous reset and as
// logic, which is intended.
module ahb_slave
  import ddr_pkg::*;
#(
  parameter int unsigned HADDR_W = 32,
  parameter int unsigned SYS_AW  = ddr_pkg::DEF_SYS_AW,
  parameter int unsigned SYS_DW  = ddr_pkg::DEF_SYS_DW
) (
  input  logic               hclk,
  input  logic               reset,
  // AHB
  input  logic               hsel,
  input  logic [HADDR_W-1:0] haddr,
  input  logic [1:0]         htrans,
  input  logic               hwrite,
  input  logic [SYS_DW-1:0]  hwdata,
  input  logic               hready,
  input  logic [3:0]         hmaster,
  output logic               hreadyout,
  output logic [1:0]         hresp,
  output logic [SYS_DW-1:0]  hrdata,
  output logic [15:0]        hsplit,
  // controller
  output logic [SYS_AW-1:0]  sys_a,
  output logic               sys_adsn,
  output logic               sys_r_wn,
  output logic [SYS_DW-1:0]  sys_wdata,
  input  cstate_t            cstate,
  input  logic               sys_cyc_end,
  input  logic [SYS_DW-1:0]  sys_rdata,
  input  logic               sys_d_valid
);

  localparam int unsigned BYTE_SH = $clog2(SYS_DW / 8);

  localparam logic [1:0] HRESP_OKAY  = 2'b00;
  localparam logic [1:0] HRESP_SPLIT = 2'b11;

  // data-phase response
  typedef enum logic [1:0] {R_OKAY, R_WAIT, R_SPLIT1, R_SPLIT2} resp_t;
  // controller job
  typedef enum logic [1:0] {J_IDLE, J_REQ, J_RUN, J_HOLD} job_t;

  resp_t       resp;
  job_t        job;
  logic [3:0]  owner;     // master whose read is in the job
  logic [15:0] pending;   // masters split because the slave was busy

  logic transfer, retry_hit;
  assign transfer  = hsel && htrans[1] && hready;
  assign retry_hit = (job == J_HOLD) && !hwrite && (hmaster == owner)
                     && (haddr[BYTE_SH +: SYS_AW] == sys_a);

  always_ff @(posedge hclk or posedge reset) begin
    if (reset) begin
      resp      <= R_OKAY;
      job       <= J_IDLE;
      owner     <= '0;
      pending   <= '0;
      hsplit    <= '0;
      sys_a     <= '0;
      sys_r_wn  <= 1'b1;
      sys_wdata <= '0;
      hrdata    <= '0;
    end else begin
      hsplit <= '0;

      // response of the current data phase
      unique case (resp)
        R_SPLIT1: resp <= R_SPLIT2;
        R_SPLIT2: resp <= R_OKAY;
        R_WAIT:   if (sys_cyc_end) resp <= R_OKAY;
        default:  ;
      endcase

      // controller job
      unique case (job)
        J_REQ:   begin
                   if (!sys_r_wn) sys_wdata <= hwdata;
                   if (cstate == C_ACTIVE) job <= J_RUN;
                 end
        J_RUN:   if (sys_r_wn && sys_d_valid) begin
                   hrdata        <= sys_rdata;
                   hsplit[owner] <= 1'b1;
                   job           <= J_HOLD;
                 end else if (!sys_r_wn && sys_cyc_end) begin
                   hsplit  <= pending;
                   pending <= '0;
                   job     <= J_IDLE;
                 end
        default: ;
      endcase

      // address phase of a new transfer (HREADY high, so no job or response
      // update above conflicts with it: writes complete while HREADY is low)
      if (transfer) begin
        if (retry_hit) begin
          resp    <= R_OKAY;        // hrdata already holds the word
          job     <= J_IDLE;
          hsplit  <= pending;
          pending <= '0;
        end else if (job != J_IDLE) begin
          resp             <= R_SPLIT1;
          pending[hmaster] <= 1'b1;
        end else begin
          sys_a    <= haddr[BYTE_SH +: SYS_AW];
          sys_r_wn <= !hwrite;
          job      <= J_REQ;
          if (hwrite) resp <= R_WAIT;
          else begin
            resp  <= R_SPLIT1;
            owner <= hmaster;
          end
        end
      end
    end
  end

  assign sys_adsn  = (job != J_REQ);
  assign hreadyout = (resp == R_OKAY) || (resp == R_SPLIT2);
  assign hresp     = (resp == R_SPLIT1 || resp == R_SPLIT2) ? HRESP_SPLIT : HRESP_OKAY;

  // The write data must be in the data path's latch before c_WRITEA ends:
  // it is registered in J_REQ, at least two clocks earlier.
  a_write_waits: assert property (@(posedge hclk) disable iff (reset)
                                  job != J_IDLE && !sys_r_wn |-> resp == R_WAIT);
  // A released master is never the one whose read data is still held.
  a_hold_owner: assert property (@(posedge hclk) disable iff (reset)
                                 job == J_HOLD |-> !pending[owner]);

endmodule
