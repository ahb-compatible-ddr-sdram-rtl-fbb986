// sig_gen: signal generation module of the DDR SDRAM controller.
//
// Decodes istate (during initialization) and cstate (afterwards) into the
// DDR command, address and bank pins. Every output is registered, so a
// command appears on the pins one clock after the state that asks for it
// (ACTIVE one clock after c_ACTIVE, READ after c_READA, WRITE after c_WRITEA).
//   i_PRE             PRECHARGE, A10 high (all banks)
//   i_EMRS            LOAD MODE, BA = 01, extended mode register = 0 (DLL on)
//   i_MRS             LOAD MODE, BA = 00, mode register; A8 (DLL reset) set
//                     the first time (load_mrs_done still low), clear after
//   i_AR1, i_AR2, c_AR AUTO REFRESH
//   c_ACTIVE          ACTIVE, bank and row from sys_a
//   c_READA/c_WRITEA  READ/WRITE, bank and column from sys_a, A10 high
//                     (auto precharge)
//   any other state   NOP
// CKE is low and CS# high (deselect) only while INIT_FSM waits in i_IDLE for
// the 200 us stabilization delay; afterwards CKE stays high and CS# low.
//
// sys_a is the address of a 64-bit system word: bank = sys_a[21:20],
// row = sys_a[19:7], and sys_a[6:0] selects a group of BURST_LEN 16-bit
// columns, so the DDR column is {sys_a[6:0], 2'b00} with a burst of four.
// sys_a must be stable from c_ACTIVE until c_READA/c_WRITEA.
//
// Follows the paper: the command table (Table 1), the mode-register layout
// (Fig. 3), the one-clock command delay (Sec. 6) and A10 for auto precharge.
// Own choices: the 13-bit DDR address bus (the mode-register figure shows
// A0..A12; the block diagram prints a 22-bit ddr_add), the bank/row/column
// split of sys_a, and the CKE/CS# behaviour before initialization.
module sig_gen
  import ddr_pkg::*;
#(
  parameter int unsigned SYS_AW    = ddr_pkg::DEF_SYS_AW,
  parameter int unsigned DDR_AW    = ddr_pkg::DEF_DDR_AW,
  parameter int unsigned BA_W      = ddr_pkg::DEF_BA_W,
  parameter int unsigned ROW_W     = ddr_pkg::DEF_ROW_W,
  parameter int unsigned COLW_W    = ddr_pkg::DEF_COLW_W,
  parameter int unsigned BURST_LEN = ddr_pkg::DEF_BURST_LEN,
  parameter int unsigned CAS_LAT   = ddr_pkg::DEF_CAS_LAT
) (
  input  logic              clk,
  input  logic              reset,
  input  istate_t           istate,
  input  cstate_t           cstate,
  input  logic              load_mrs_done,
  input  logic [SYS_AW-1:0] sys_a,
  output logic              ddr_csn,
  output logic              ddr_cke,
  output logic              ddr_rasn,
  output logic              ddr_casn,
  output logic              ddr_wen,
  output logic [DDR_AW-1:0] ddr_add,
  output logic [BA_W-1:0]   ddr_ba
);

  localparam int unsigned BL_W  = $clog2(BURST_LEN);
  localparam int unsigned COL_W = COLW_W + BL_W;

  localparam logic [12:0] MR_DLL_RESET = mode_reg(BURST_LEN, CAS_LAT, 1'b0, 1'b1);
  localparam logic [12:0] MR_NORMAL    = mode_reg(BURST_LEN, CAS_LAT, 1'b0, 1'b0);

  logic [BA_W-1:0]   bank;
  logic [ROW_W-1:0]  row;
  logic [COL_W-1:0]  col;
  assign bank = sys_a[SYS_AW-1 -: BA_W];
  assign row  = sys_a[COLW_W +: ROW_W];
  assign col  = {sys_a[COLW_W-1:0], {BL_W{1'b0}}};

  ddr_cmd_t          cmd;
  logic [DDR_AW-1:0] add;
  logic [BA_W-1:0]   ba;

  always_comb begin
    cmd = CMD_NOP;
    add = '0;
    ba  = '0;
    if (istate != I_READY) begin
      unique case (istate)
        I_PRE:  begin cmd = CMD_PRE; add[10] = 1'b1; end
        I_EMRS: begin cmd = CMD_LMR; ba = BA_W'(1); end
        I_MRS:  begin
                  cmd = CMD_LMR;
                  add = DDR_AW'(load_mrs_done ? MR_NORMAL : MR_DLL_RESET);
                end
        I_AR1, I_AR2: cmd = CMD_AR;
        default: cmd = CMD_NOP;
      endcase
    end else begin
      unique case (cstate)
        C_AR:     cmd = CMD_AR;
        C_ACTIVE: begin cmd = CMD_ACT;   add = DDR_AW'(row); ba = bank; end
        C_READA:  begin cmd = CMD_READ;  add = DDR_AW'(col); add[10] = 1'b1; ba = bank; end
        C_WRITEA: begin cmd = CMD_WRITE; add = DDR_AW'(col); add[10] = 1'b1; ba = bank; end
        default:  cmd = CMD_NOP;
      endcase
    end
  end

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      ddr_csn  <= 1'b1;
      ddr_cke  <= 1'b0;
      {ddr_rasn, ddr_casn, ddr_wen} <= CMD_NOP;
      ddr_add  <= '0;
      ddr_ba   <= '0;
    end else begin
      ddr_csn  <= (istate == I_IDLE);
      ddr_cke  <= (istate != I_IDLE);
      {ddr_rasn, ddr_casn, ddr_wen} <= cmd;
      ddr_add  <= add;
      ddr_ba   <= ba;
    end
  end

  // The column address must leave A10 free for the auto-precharge flag.
  initial assert (COL_W <= 10) else $error("column address overlaps A10");

endmodule
