// tb_cmd_fsm: checks the command state machine.
//
// Two instances run the same stimulus: one with the default wait counts and
// one with tRFC, tRCD and tDAL set to 0 (the paths that skip those wait
// states). A testbench clock counter stands in for the controller's. For
// every cycle the sequence of states and the clocks spent in each is
// compared with the expected one:
//   read   c_ACTIVE 1, c_tRCD tRCD, c_READA 1, c_cl CL, c_rdata BL/2
//   write  c_ACTIVE 1, c_tRCD tRCD, c_WRITEA 1, c_wdata BL/2, c_tDAL tDAL
//   refresh c_AR 1, c_tRFC tRFC
// which gives the fixed read and write cycle lengths. Also checked: no cycle
// starts before sys_init_done, a refresh request wins over a simultaneous
// access request (which is then ignored), sys_ref_ack covers exactly the refresh states, sys_r_wn is
// only looked at in the clock before c_READA/c_WRITEA, and sys_cyc_end
// pulses once in the first c_idle clock after each read or write.
`timescale 1ns/1ps
module tb_cmd_fsm;
  import ddr_pkg::*;

  logic clk = 0, reset = 1, init_done = 0, adsn = 1, r_wn = 1, ref_req = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL at %0t: %s", $time, s); end
  endtask

  localparam int NCFG = 2;
  localparam int CL  = int'(DEF_CAS_LAT);
  localparam int BLC = int'(DEF_BURST_LEN) / 2;

  function automatic int trfc_c(input int g); return g == 0 ? int'(DEF_NUM_CLK_TRFC) : 0; endfunction
  function automatic int trcd_c(input int g); return g == 0 ? int'(DEF_NUM_CLK_TRCD) : 0; endfunction
  function automatic int tdal_c(input int g); return g == 0 ? int'(DEF_NUM_CLK_TDAL) : 0; endfunction

  // kind of the cycle the stimulus starts: 0 read, 1 write, 2 refresh
  int kind_q [$];

  for (genvar g = 0; g < NCFG; g++) begin : cfg
    localparam int TRFC = trfc_c(g);
    localparam int TRCD = trcd_c(g);
    localparam int TDAL = tdal_c(g);
    cstate_t     st;
    logic        ack, cyc_end, sr;
    logic [31:0] cnt;
    cmd_fsm #(.NUM_CLK_TRFC(TRFC), .NUM_CLK_TRCD(TRCD), .NUM_CLK_TDAL(TDAL)) dut (
      .clk(clk), .reset(reset), .sys_init_done(init_done), .sys_adsn(adsn), .sys_r_wn(r_wn),
      .sys_ref_req(ref_req), .clk_cnt(cnt), .cstate(st), .sys_ref_ack(ack),
      .sys_cyc_end(cyc_end), .sync_reset_cnt(sr)
    );
    always_ff @(posedge clk) cnt <= (reset || sr) ? 32'd0 : cnt + 32'd1;

    cstate_t run_s [$];
    int      run_n [$];
    cstate_t prev = C_IDLE;
    int      n_cycles = 0, n_end = 0;
    cstate_t last_busy = C_IDLE;
    always @(negedge clk) if (!reset) begin
      check(ack == (st == C_AR || st == C_TRFC), "sys_ref_ack covers the refresh states");
      if (!init_done) check(st == C_IDLE, "cycle before init done");
      // sys_cyc_end: first idle clock after a read or write
      check(cyc_end == (st == C_IDLE && (prev == C_RDATA || prev == C_WDATA || prev == C_TDAL)),
            $sformatf("cfg %0d sys_cyc_end=%0b in %s after %s", g, cyc_end, st.name(), prev.name()));
      if (cyc_end) n_end++;
      if (st != C_IDLE) begin
        if (prev == C_IDLE) begin run_s.delete(); run_n.delete(); end
        if (run_s.size() == 0 || run_s[run_s.size()-1] != st) begin
          run_s.push_back(st); run_n.push_back(1);
        end else run_n[run_n.size()-1] = run_n[run_n.size()-1] + 1;
      end else if (prev != C_IDLE) begin
        check_cycle();
        n_cycles++;
      end
      prev = st;
    end

    task automatic check_cycle();
      cstate_t es [$];
      int      en [$];
      int      k;
      k = kind_q[n_cycles];
      if (k == 2) begin
        es.push_back(C_AR); en.push_back(1);
        if (TRFC > 0) begin es.push_back(C_TRFC); en.push_back(TRFC); end
      end else begin
        es.push_back(C_ACTIVE); en.push_back(1);
        if (TRCD > 0) begin es.push_back(C_TRCD); en.push_back(TRCD); end
        if (k == 0) begin
          es.push_back(C_READA); en.push_back(1);
          es.push_back(C_CL);    en.push_back(CL);
          es.push_back(C_RDATA); en.push_back(BLC);
        end else begin
          es.push_back(C_WRITEA); en.push_back(1);
          es.push_back(C_WDATA);  en.push_back(BLC);
          if (TDAL > 0) begin es.push_back(C_TDAL); en.push_back(TDAL); end
        end
      end
      check(run_s.size() == es.size(), $sformatf("cfg %0d cycle %0d kind %0d: %0d states, expected %0d",
                                                 g, n_cycles, k, run_s.size(), es.size()));
      for (int i = 0; i < es.size() && i < run_s.size(); i++)
        check(run_s[i] == es[i] && run_n[i] == en[i],
              $sformatf("cfg %0d cycle %0d step %0d: %s x%0d, expected %s x%0d", g, n_cycles, i,
                        run_s[i].name(), run_n[i], es[i].name(), en[i]));
    endtask
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one request, held for one clock (access) or until acknowledged (refresh)
  task automatic request(input int k, input bit with_adsn_too);
    @(negedge clk);
    kind_q.push_back(k);
    if (k == 2) begin
      ref_req = 1;
      // an access request in the same clock is ignored: refresh has priority
      if (with_adsn_too) begin adsn = 0; r_wn = $urandom; end
      @(negedge clk);
      check(cfg[0].ack && cfg[1].ack, "refresh acknowledged in the clock after the request");
      ref_req = 0;
      adsn = 1;
    end else begin
      adsn = 0; r_wn = $urandom;  // don't care here, valid later
      @(negedge clk);
      adsn = 1;
      // sys_r_wn is sampled in the clock before c_READA/c_WRITEA
      r_wn = (k == 0);
    end
    // wait for both instances to return to idle
    @(negedge clk);
    while (cfg[0].st != C_IDLE || cfg[1].st != C_IDLE) @(negedge clk);
    r_wn = $urandom;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    // requests before initialization is done are ignored
    adsn = 0; ref_req = 1;
    repeat (10) @(negedge clk);
    adsn = 1; ref_req = 0;
    init_done = 1;
    @(negedge clk);
    request(0, 0);
    request(1, 0);
    request(2, 0);
    for (int i = 0; i < 40; i++) request($urandom_range(0, 2), 0);
    request(2, 1);                       // refresh and access together: refresh only
    request(0, 0);
    repeat (5) @(negedge clk);
    check(cfg[0].n_cycles == kind_q.size() && cfg[1].n_cycles == kind_q.size(),
          $sformatf("all cycles completed: %0d %0d of %0d", cfg[0].n_cycles, cfg[1].n_cycles, kind_q.size()));
    check(cfg[0].n_end == cfg[1].n_end && cfg[0].n_end > 0, $sformatf("sys_cyc_end pulses %0d %0d", cfg[0].n_end, cfg[1].n_end));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
