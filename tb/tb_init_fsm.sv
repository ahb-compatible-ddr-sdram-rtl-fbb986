// tb_init_fsm: checks the initialization state machine.
//
// Three instances with different wait-state counts run side by side: the
// default timing, a slower set, and all waits zero (the paths that skip the
// wait states). Each has its own clock counter built in the testbench. The
// sequence of states and the number of clocks spent in each is recorded and
// compared with the sequence worked out from the paper's description:
// NOP, PRE, tRP, EMRS, tMRD, MRS, tMRD, PRE, tRP, AR1, tRFC, AR2, tRFC, MRS,
// tMRD, ready, with the wait states absent when their count is 0. Also
// checked: nothing moves before sys_dly_200us, load_mrs_done is low during
// the first MRS and high during the second, load_mrs_af is set only after
// the second AUTO REFRESH, and sys_init_done follows i_ready.
`timescale 1ns/1ps
module tb_init_fsm;
  import ddr_pkg::*;

  logic clk = 0, reset = 1, dly = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  localparam int NCFG = 3;
  function automatic int trp_c(input int g);
    return (g == 0) ? int'(DEF_NUM_CLK_TRP) : (g == 1) ? 3 : 0;
  endfunction
  function automatic int trfc_c(input int g);
    return (g == 0) ? int'(DEF_NUM_CLK_TRFC) : (g == 1) ? 9 : 0;
  endfunction
  function automatic int tmrd_c(input int g);
    return (g == 0) ? int'(DEF_NUM_CLK_TMRD) : (g == 1) ? 2 : 0;
  endfunction

  bit recording = 0;
  bit done [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : cfg
    localparam int TRP  = trp_c(g);
    localparam int TRFC = trfc_c(g);
    localparam int TMRD = tmrd_c(g);
    istate_t     st;
    logic        init_done, mrs_done, mrs_af, sr;
    logic [31:0] cnt;
    init_fsm #(.NUM_CLK_TRP(TRP), .NUM_CLK_TRFC(TRFC), .NUM_CLK_TMRD(TMRD)) dut (
      .clk(clk), .reset(reset), .sys_dly_200us(dly), .clk_cnt(cnt), .istate(st),
      .sys_init_done(init_done), .load_mrs_done(mrs_done), .load_mrs_af(mrs_af),
      .sync_reset_cnt(sr)
    );
    always_ff @(posedge clk) cnt <= (reset || sr) ? 32'd0 : cnt + 32'd1;

    istate_t trace [$];
    int      mrs_seen = 0;
    always @(negedge clk) if (!reset) begin
      check(init_done == (st == I_READY), "sys_init_done follows i_ready");
      if (!recording) check(st == I_IDLE, "state moved before sys_dly_200us");
      else begin
        trace.push_back(st);
        if (st == I_MRS) begin
          check(mrs_done == (mrs_seen > 0), "load_mrs_done during MRS");
          mrs_seen++;
        end
        if (st == I_AR1 || st == I_AR2 || st == I_TRFC1) check(!mrs_af, "load_mrs_af early");
        if (st == I_READY) check(mrs_af && mrs_done, "flags set at ready");
      end
    end

    istate_t exp_s [$];
    int      exp_n [$];
    istate_t run_s [$];
    int      run_n [$];
    initial begin
      wait (recording);
      repeat (120) @(posedge clk);
      // expected sequence
      exp_s.push_back(I_NOP);  exp_n.push_back(1);
      exp_s.push_back(I_PRE);  exp_n.push_back(1);
      if (TRP > 0)  begin exp_s.push_back(I_TRP);   exp_n.push_back(TRP);  end
      exp_s.push_back(I_EMRS); exp_n.push_back(1);
      if (TMRD > 0) begin exp_s.push_back(I_TMRD);  exp_n.push_back(TMRD); end
      exp_s.push_back(I_MRS);  exp_n.push_back(1);
      if (TMRD > 0) begin exp_s.push_back(I_TMRD);  exp_n.push_back(TMRD); end
      exp_s.push_back(I_PRE);  exp_n.push_back(1);
      if (TRP > 0)  begin exp_s.push_back(I_TRP);   exp_n.push_back(TRP);  end
      exp_s.push_back(I_AR1);  exp_n.push_back(1);
      if (TRFC > 0) begin exp_s.push_back(I_TRFC1); exp_n.push_back(TRFC); end
      exp_s.push_back(I_AR2);  exp_n.push_back(1);
      if (TRFC > 0) begin exp_s.push_back(I_TRFC2); exp_n.push_back(TRFC); end
      exp_s.push_back(I_MRS);  exp_n.push_back(1);
      if (TMRD > 0) begin exp_s.push_back(I_TMRD);  exp_n.push_back(TMRD); end
      exp_s.push_back(I_READY); exp_n.push_back(0);
      // compress the trace into runs
      foreach (trace[i]) begin
        if (i == 0 || trace[i] != trace[i-1]) begin run_s.push_back(trace[i]); run_n.push_back(1); end
        else run_n[run_n.size()-1] = run_n[run_n.size()-1] + 1;
      end
      check(run_s.size() == exp_s.size(),
            $sformatf("cfg %0d: %0d states visited, expected %0d", g, run_s.size(), exp_s.size()));
      for (int i = 0; i < exp_s.size() && i < run_s.size(); i++) begin
        check(run_s[i] == exp_s[i], $sformatf("cfg %0d step %0d: state %s expected %s",
                                             g, i, run_s[i].name(), exp_s[i].name()));
        if (exp_s[i] != I_READY)
          check(run_n[i] == exp_n[i], $sformatf("cfg %0d step %0d (%s): %0d clocks, expected %0d",
                                               g, i, exp_s[i].name(), run_n[i], exp_n[i]));
      end
      check(mrs_seen == 2, "two MRS states");
      done[g] = 1;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    repeat (20) @(negedge clk);
    dly = 1;
    @(negedge clk) recording = 1;
    wait (done[0] && done[1] && done[2]);
    // reset returns every instance to i_IDLE
    @(negedge clk) reset = 1;
    @(negedge clk);
    check(cfg[0].st == I_IDLE && cfg[1].st == I_IDLE && cfg[2].st == I_IDLE, "reset to i_IDLE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
