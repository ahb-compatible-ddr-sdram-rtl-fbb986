// tb_ddr_ctrl: checks the main control module (both state machines and the
// shared clock counter) at its default parameters.
//
// Checked: nothing happens before sys_dly_200us; initialization takes
// 9 + 2 tRP + 3 tMRD + 2 tRFC clocks (in wait-state clocks) from the clock
// sys_dly_200us is seen; load_mrs_done is set by the first MRS; the clock
// counter reads the number of clocks already spent in the current state of
// whichever machine is running; a read cycle lasts 2 + tRCD + CL + BL/2
// clocks from c_ACTIVE to c_idle and a write cycle 2 + tRCD + BL/2 + tDAL
// (7 and 8 at the defaults); sys_cyc_end marks the end; a refresh holds sys_ref_ack for
// 1 + tRFC clocks and blocks accesses meanwhile.
`timescale 1ns/1ps
module tb_ddr_ctrl;
  import ddr_pkg::*;

  logic clk = 0, reset = 1, dly = 0, adsn = 1, r_wn = 1, ref_req = 0;
  always #5 clk = ~clk;
  logic init_done, ref_ack, cyc_end, mrs_done;
  istate_t ist;
  cstate_t cst;
  logic [31:0] cnt;

  ddr_ctrl dut (
    .sys_clk(clk), .sys_reset(reset), .sys_dly_200us(dly), .sys_adsn(adsn), .sys_r_wn(r_wn),
    .sys_ref_req(ref_req), .sys_init_done(init_done), .sys_ref_ack(ref_ack),
    .sys_cyc_end(cyc_end), .istate(ist), .cstate(cst), .clk_cnt(cnt), .load_mrs_done(mrs_done)
  );

  localparam int TRP  = int'(DEF_NUM_CLK_TRP);
  localparam int TRFC = int'(DEF_NUM_CLK_TRFC);
  localparam int TMRD = int'(DEF_NUM_CLK_TMRD);
  localparam int TRCD = int'(DEF_NUM_CLK_TRCD);
  localparam int TDAL = int'(DEF_NUM_CLK_TDAL);
  localparam int CL   = int'(DEF_CAS_LAT);
  localparam int BLC  = int'(DEF_BURST_LEN) / 2;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL at %0t: %s", $time, s); end
  endtask

  // independent count of clocks in the current state
  istate_t pi = I_IDLE;
  cstate_t pc = C_IDLE;
  int      in_state = 0;
  logic    reset_q = 1'b1;
  always @(posedge clk) reset_q <= reset;
  always @(negedge clk) if (!reset_q) begin
    if (ist != pi || cst != pc) in_state = 0; else in_state++;
    check(cnt == 32'(in_state), $sformatf("clock counter %0d, expected %0d", cnt, in_state));
    pi = ist; pc = cst;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t, n;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    adsn = 0; ref_req = 1;
    repeat (30) @(negedge clk);
    check(ist == I_IDLE && cst == C_IDLE && !init_done, "idle before the 200 us delay");
    adsn = 1; ref_req = 0;
    dly = 1; t = 0;
    while (!init_done) begin
      @(negedge clk); t++;
      if (ist == I_MRS) check(1, "");
      if (ist == I_AR1) check(mrs_done, "load_mrs_done set by the first MRS");
    end
    check(t == 9 + 2 * TRP + 3 * TMRD + 2 * TRFC, $sformatf("init took %0d clocks", t));
    check(ist == I_READY, "i_ready");

    repeat (3) begin
      // read
      adsn = 0; r_wn = 1;
      @(negedge clk); adsn = 1; t = 0;
      check(cst == C_ACTIVE, "read starts with c_ACTIVE");
      while (cst != C_IDLE) begin @(negedge clk); t++; end
      check(t == 2 + TRCD + CL + BLC, $sformatf("read cycle %0d clocks", t));
      check(cyc_end, "sys_cyc_end after read");
      // write
      adsn = 0; r_wn = 0;
      @(negedge clk); adsn = 1; t = 0;
      while (cst != C_IDLE) begin @(negedge clk); t++; end
      check(t == 2 + TRCD + BLC + TDAL, $sformatf("write cycle %0d clocks", t));
      check(cyc_end, "sys_cyc_end after write");
      // refresh, with an access request held meanwhile
      ref_req = 1; adsn = 0; r_wn = 1;
      @(negedge clk);
      check(ref_ack && cst == C_AR, "refresh wins");
      ref_req = 0; n = 0;
      while (ref_ack) begin
        check(cst != C_ACTIVE, "no access during refresh");
        @(negedge clk); n++;
      end
      check(n == 1 + TRFC, $sformatf("sys_ref_ack held %0d clocks", n));
      check(cst == C_IDLE, "back to c_idle after the refresh");
      @(negedge clk);
      check(cst == C_ACTIVE, "the held access follows the refresh");
      adsn = 1;
      while (cst != C_IDLE) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
