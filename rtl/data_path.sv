// data_path: data path module of the DDR SDRAM controller.
//
// Moves data between the 64-bit system bus and the 16-bit DDR DQ pins. One
// system word is one DDR burst of four 16-bit words, system bits [15:0]
// first. The DQ pins run at double data rate: two words per sys_clk period,
// produced and sampled with clk2x, a clock at twice the frequency of clk whose
// rising edges include every rising edge of clk.
//
// Write: the system word is latched while CMD_FSM is in c_WRITEA. In each
// c_wdata clock the next pair of words is registered in the clk domain; the
// clk2x logic puts the low word on DQ in the first half of the following clk
// period and the high word in the second half, so the first word reaches
// the pins one clock after the WRITE command (write latency 1). DQS is driven
// from the falling edge of clk2x, so its edges fall in the middle of each
// data word (center aligned).
//
// Read: the clk2x logic samples DQ at the end of each half period and forms
// a word pair at every rising edge of clk. The pairs that belong to the burst
// are picked by delaying "cstate is c_rdata" by the command register, the
// CAS latency already spent in c_cl and the capture stage; when the last pair
// is in, sys_rdata holds the whole 64-bit word and sys_d_valid pulses for one
// clock, two clocks after c_rdata ends.
//
// Which clk2x edge is aligned with clk is found without sampling the clock:
// a flop toggled by clk is copied by clk2x; at the aligned edge the copy and
// the flop agree, at the other edge they differ.
//
// Interface: clk, clk2x, reset (async, active high), istate, cstate, clk_cnt
// (the controller's clock counter), sys_wdata in; sys_rdata, sys_d_valid
// out; DQ as dq_o/dq_oe/dq_i and DQS as dqs_o/dqs_oe (pad tristate buffers
// are outside this module).
//
// Follows the paper: the ports of Fig. 11 (Clk, Clk2x, Reset, iState,
// cState, 64-bit system data, 16-bit DQ, data_valid) and the 16-to-64-bit
// latching and dispatching of Sec. 5. Own choices: the word order, the
// split of the bidirectional buses into in/out/enable, and read capture at a
// fixed latency with clk2x instead of with the DQS strobe returned by the
// memory (no DQS input is shown in the paper's top-level schematic).
// Only the low log2(BURST_LEN/2) bits of clk_cnt index the burst, so lint
// lists the upper counter bits as unused.
module data_path
  import ddr_pkg::*;
#(
  parameter int unsigned CNT_W     = 32,
  parameter int unsigned SYS_DW    = ddr_pkg::DEF_SYS_DW,
  parameter int unsigned DQ_W      = ddr_pkg::DEF_DQ_W,
  parameter int unsigned BURST_LEN = ddr_pkg::DEF_BURST_LEN
) (
  input  logic              clk,
  input  logic              clk2x,
  input  logic              reset,
  input  istate_t           istate,
  input  cstate_t           cstate,
  input  logic [CNT_W-1:0]  clk_cnt,
  input  logic [SYS_DW-1:0] sys_wdata,
  output logic [SYS_DW-1:0] sys_rdata,
  output logic              sys_d_valid,
  output logic [DQ_W-1:0]   dq_o,
  output logic              dq_oe,
  input  logic [DQ_W-1:0]   dq_i,
  output logic              dqs_o,
  output logic              dqs_oe
);

  localparam int unsigned PAIRS = BURST_LEN / 2;
  localparam int unsigned IDX_W = (PAIRS > 1) ? $clog2(PAIRS) : 1;

  initial assert (SYS_DW == BURST_LEN * DQ_W)
    else $error("one system word must be one DDR burst");

  logic [IDX_W-1:0] idx;
  assign idx = IDX_W'(clk_cnt);

  // ---------------- clk domain ----------------
  logic              tg;            // toggles every clk, marks the aligned clk2x edge
  logic [SYS_DW-1:0] wbuf;          // write word latched in c_WRITEA
  logic [2*DQ_W-1:0] wr_pair;       // word pair for the next clk period
  logic              wr_en;
  logic              rd_p1, rd_p2;  // c_rdata delayed by one and two clocks
  logic [IDX_W-1:0]  rd_i1, rd_i2;
  logic [2*DQ_W-1:0] rd_pair;       // from the clk2x domain

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      tg          <= 1'b0;
      wbuf        <= '0;
      wr_pair     <= '0;
      wr_en       <= 1'b0;
      rd_p1       <= 1'b0;
      rd_p2       <= 1'b0;
      rd_i1       <= '0;
      rd_i2       <= '0;
      sys_rdata   <= '0;
      sys_d_valid <= 1'b0;
    end else begin
      tg <= ~tg;
      if (cstate == C_WRITEA) wbuf <= sys_wdata;
      wr_en   <= (istate == I_READY) && (cstate == C_WDATA);
      wr_pair <= wbuf[2*DQ_W*idx +: 2*DQ_W];
      rd_p1   <= (istate == I_READY) && (cstate == C_RDATA);
      rd_i1   <= idx;
      rd_p2   <= rd_p1;
      rd_i2   <= rd_i1;
      if (rd_p2) sys_rdata[2*DQ_W*rd_i2 +: 2*DQ_W] <= rd_pair;
      sys_d_valid <= rd_p2 && (rd_i2 == IDX_W'(PAIRS - 1));
    end
  end

  // ---------------- clk2x domain ----------------
  logic            tg_q;
  logic            aligned;
  logic [DQ_W-1:0] wr_hi;
  logic [DQ_W-1:0] rd_lo;

  assign aligned = (tg == tg_q);

  always_ff @(posedge clk2x or posedge reset) begin
    if (reset) begin
      tg_q    <= 1'b0;
      dq_o    <= '0;
      dq_oe   <= 1'b0;
      wr_hi   <= '0;
      rd_lo   <= '0;
      rd_pair <= '0;
    end else begin
      tg_q <= tg;
      if (aligned) begin
        dq_o    <= wr_pair[DQ_W-1:0];
        wr_hi   <= wr_pair[2*DQ_W-1:DQ_W];
        dq_oe   <= wr_en;
        rd_pair <= {dq_i, rd_lo};
      end else begin
        dq_o    <= wr_hi;
        rd_lo   <= dq_i;
      end
    end
  end

  // DQS toggles in the middle of every driven data word.
  always_ff @(negedge clk2x or posedge reset) begin
    if (reset) begin
      dqs_o  <= 1'b0;
      dqs_oe <= 1'b0;
    end else begin
      dqs_oe <= dq_oe;
      dqs_o  <= dq_oe ? ~dqs_o : 1'b0;
    end
  end

endmodule
