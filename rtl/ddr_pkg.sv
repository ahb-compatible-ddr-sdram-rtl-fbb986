// ddr_pkg: types and constants shared by the DDR SDRAM controller.
//
// Holds the state encodings of the two controller state machines (INIT_FSM
// istate, CMD_FSM cstate; 4 bits each as drawn in the functional block
// diagram), the DDR command encodings of the RAS#/CAS#/WE# pins, the default
// geometry of the system and DDR buses, the mode-register fields and the
// conversion of DDR timing specifications (in picoseconds) into the number of
// clocks a wait state lasts.
//
// Follows the paper: state names, 4-bit istate/cstate, the command table
// (RAS/CAS/WE levels), 16-bit DQ, 64-bit system data, 22-bit system address,
// burst length 4 and CAS latency 2, mode-register field positions.
// Own choices: the numeric state codes, the DDR-266 class timing values
// (tRP 20 ns, tRFC 75 ns, tMRD 15 ns, tRCD 20 ns, tWR 15 ns), the 10 ns
// clock and the split of the system address into bank/row/column.
package ddr_pkg;

  // INIT_FSM states (Fig. 5 names).
  typedef enum logic [3:0] {
    I_IDLE  = 4'd0,
    I_NOP   = 4'd1,
    I_PRE   = 4'd2,
    I_TRP   = 4'd3,
    I_EMRS  = 4'd4,
    I_TMRD  = 4'd5,
    I_MRS   = 4'd6,
    I_AR1   = 4'd7,
    I_TRFC1 = 4'd8,
    I_AR2   = 4'd9,
    I_TRFC2 = 4'd10,
    I_READY = 4'd11
  } istate_t;

  // CMD_FSM states (Fig. 7 names).
  typedef enum logic [3:0] {
    C_IDLE   = 4'd0,
    C_AR     = 4'd1,
    C_TRFC   = 4'd2,
    C_ACTIVE = 4'd3,
    C_TRCD   = 4'd4,
    C_READA  = 4'd5,
    C_CL     = 4'd6,
    C_RDATA  = 4'd7,
    C_WRITEA = 4'd8,
    C_WDATA  = 4'd9,
    C_TDAL   = 4'd10
  } cstate_t;

  // DDR commands as {RAS#, CAS#, WE#} (Table 1, L = 0, H = 1).
  typedef enum logic [2:0] {
    CMD_LMR   = 3'b000,
    CMD_AR    = 3'b001,
    CMD_PRE   = 3'b010,
    CMD_ACT   = 3'b011,
    CMD_WRITE = 3'b100,
    CMD_READ  = 3'b101,
    CMD_NOP   = 3'b111
  } ddr_cmd_t;

  // Bus geometry.
  localparam int unsigned DEF_SYS_AW  = 22;  // system (64-bit word) address
  localparam int unsigned DEF_SYS_DW  = 64;  // system data
  localparam int unsigned DEF_DQ_W    = 16;  // DDR data
  localparam int unsigned DEF_DDR_AW  = 13;  // DDR address pins A0..A12
  localparam int unsigned DEF_BA_W    = 2;   // bank address BA0..BA1
  localparam int unsigned DEF_ROW_W   = 13;  // row address bits
  localparam int unsigned DEF_COLW_W  = 7;   // column bits that select a 64-bit word

  // Operating mode.
  localparam int unsigned DEF_BURST_LEN = 4;
  localparam int unsigned DEF_CAS_LAT   = 2;

  // Timing (picoseconds) and clock period.
  localparam int unsigned TCK_PS  = 10000;
  localparam int unsigned TRP_PS  = 20000;
  localparam int unsigned TRFC_PS = 75000;
  localparam int unsigned TMRD_PS = 15000;
  localparam int unsigned TRCD_PS = 20000;
  localparam int unsigned TWR_PS  = 15000;

  // Whole clocks needed to cover t_ps.
  function automatic int unsigned clks(input int unsigned t_ps, input int unsigned tck_ps);
    return (t_ps + tck_ps - 1) / tck_ps;
  endfunction

  // Clocks spent in the wait state that follows a one-clock command state:
  // the command state already provides one clock of the delay.
  function automatic int unsigned wait_clks(input int unsigned t_ps, input int unsigned tck_ps);
    int unsigned c;
    c = clks(t_ps, tck_ps);
    return (c > 0) ? c - 1 : 0;
  endfunction

  localparam int unsigned DEF_NUM_CLK_TRP  = wait_clks(TRP_PS,  TCK_PS);
  localparam int unsigned DEF_NUM_CLK_TRFC = wait_clks(TRFC_PS, TCK_PS);
  localparam int unsigned DEF_NUM_CLK_TMRD = wait_clks(TMRD_PS, TCK_PS);
  localparam int unsigned DEF_NUM_CLK_TRCD = wait_clks(TRCD_PS, TCK_PS);
  // tDAL = tWR + tRP from the last write data. The write data reaches the
  // pins two clocks after c_wdata (registered command plus write latency),
  // and the next ACTIVE leaves the pins two clocks after c_tDAL ends, so the
  // wait state lasts tDAL - 1 clocks.
  localparam int unsigned DEF_NUM_CLK_TDAL = clks(TWR_PS, TCK_PS) + clks(TRP_PS, TCK_PS) - 1;

  // Mode register fields (Fig. 3).
  function automatic logic [2:0] bl_code(input int unsigned bl);
    case (bl)
      2:       return 3'b001;
      4:       return 3'b010;
      8:       return 3'b011;
      default: return 3'b000;
    endcase
  endfunction

  function automatic logic [2:0] cl_code(input int unsigned cl);
    // Only the integer latency 2 is supported (2.5 needs half-cycle capture).
    return (cl == 2) ? 3'b010 : 3'b000;
  endfunction

  // Mode register value: A12..A7 operating mode, A6..A4 CAS latency,
  // A3 burst type, A2..A0 burst length. dll_reset sets A8.
  function automatic logic [12:0] mode_reg(input int unsigned bl, input int unsigned cl,
                                           input logic interleaved, input logic dll_reset);
    logic [12:0] m;
    m = '0;
    m[2:0] = bl_code(bl);
    m[3]   = interleaved;
    m[6:4] = cl_code(cl);
    m[8]   = dll_reset;
    return m;
  endfunction

endpackage
