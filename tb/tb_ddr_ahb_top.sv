// tb_ddr_ahb_top: end-to-end test of the AHB DDR SDRAM controller core at its
// default parameters.
//
// An AHB master model drives the core; a behavioural DDR SDRAM model sits on
// the DDR pins and checks the command protocol and timing. The test powers
// up (200 us stabilization at the 10 ns clock, then initialization), then
// runs single writes and reads, INCR4 bursts and a long random mix against a
// scoreboard, long enough for the refresh counter to fire several times.
// Reads are split by the slave; the master waits for HSPLIT and retries.
// It checks every read word, the timing of every single transfer not
// disturbed by a refresh (fixed cycle length: 9 + tRCD + CL clocks from the
// read's data phase to HSPLIT, 7 + tRCD + tDAL clocks of data phase for a
// write), the two-cycle SPLIT response and the OKAY retry, the DDR model's
// protocol checks, and that each mechanism happened at least once:
// initialization, read, write, burst beat, refresh, a refresh taking
// precedence over a waiting access, wait states, split and retry.
`timescale 1ns/1ps
module tb_ddr_ahb_top;
  import ddr_pkg::*;

  localparam int unsigned N_RANDOM = 400;

  logic clk = 1'b0, clk2x = 1'b1, reset = 1'b0, dly200 = 1'b0;
  initial #1 reset = 1'b1;  // a rising edge, so the asynchronous reset acts at once
  // clk2x rises at every rising edge of clk and halfway between
  always #2.5 begin
    clk2x = ~clk2x;
    if (clk2x) clk = ~clk;
  end

  logic        hsel = 0, hwrite = 0;
  logic [31:0] haddr = 0;
  logic [1:0]  htrans = 0;
  logic [63:0] hwdata = 0, hrdata;
  logic        hreadyout;
  logic [1:0]  hresp;
  logic [15:0] hsplit;
  logic        init_done, ref_ack, cyc_end;
  logic        csn, cke, rasn, casn, wen, dq_oe, dqs_o, dqs_oe;
  logic [12:0] add;
  logic [1:0]  ba;
  logic [15:0] dq_o, dq_i;

  ddr_ahb_top dut (
    .sys_clk(clk), .sys_clk2x(clk2x), .sys_reset(reset), .sys_dly_200us(dly200),
    .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite), .hwdata(hwdata),
    .hready(hreadyout), .hmaster(4'd0), .hreadyout(hreadyout), .hresp(hresp), .hrdata(hrdata),
    .hsplit(hsplit),
    .sys_init_done(init_done), .sys_ref_ack(ref_ack), .sys_cyc_end(cyc_end),
    .ddr_csn(csn), .ddr_cke(cke), .ddr_rasn(rasn), .ddr_casn(casn), .ddr_wen(wen),
    .ddr_add(add), .ddr_ba(ba), .ddr_dq_o(dq_o), .ddr_dq_oe(dq_oe), .ddr_dq_i(dq_i),
    .ddr_dqs_o(dqs_o), .ddr_dqs_oe(dqs_oe)
  );

  int m_err, n_act, n_read, n_write, n_ref, n_pre, n_lmr;
  ddr_sdram_model #(
    .TRCD(clks(TRCD_PS, TCK_PS)), .TRP(clks(TRP_PS, TCK_PS)), .TRFC(clks(TRFC_PS, TCK_PS)),
    .TMRD(clks(TMRD_PS, TCK_PS)), .TDAL(clks(TWR_PS, TCK_PS) + clks(TRP_PS, TCK_PS))
  ) u_mem (
    .clk(clk), .csn(csn), .cke(cke), .rasn(rasn), .casn(casn), .wen(wen), .addr(add),
    .ba(ba), .dq_in(dq_o), .dq_in_en(dq_oe), .dq_out(dq_i), .errors(m_err),
    .n_act(n_act), .n_read(n_read), .n_write(n_write), .n_ref(n_ref), .n_pre(n_pre),
    .n_lmr(n_lmr)
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL at cycle %0d: %s", cycle, what);
    end
  endtask

  // mechanism counters
  int ev_burst_beats = 0, ev_ref_first = 0, ev_wait = 0, ev_refresh_cycles = 0;
  always @(posedge clk) begin
    if (!reset && !hreadyout) ev_wait++;
    if (dut.cstate == C_IDLE && init_done && dut.sys_ref_req && !dut.sys_adsn) ev_ref_first++;
    if (dut.cstate == C_AR) ev_refresh_cycles++;
  end

  // scoreboard of written 64-bit words
  logic [63:0] sb [logic [21:0]];

  function automatic logic [63:0] expect_word(input logic [21:0] a);
    logic [63:0] w;
    logic [1:0]  b;
    logic [12:0] r;
    int          c;
    if (sb.exists(a)) return sb[a];
    // a word never written reads the model's initial contents
    b = a[21:20]; r = a[19:7]; c = int'({a[6:0], 2'b00});
    for (int j = 0; j < 4; j++) w[16*j +: 16] = 16'(({b, r, 17'(c + j)}) * 32'h9E37 + 32'h1234);
    return w;
  endfunction

  // AHB master (HMASTER 0): one sequence of n beats at consecutive addresses
  // (n = 1 single transfer, n = 4 INCR4). A split beat is retried, with
  // NONSEQ, once HSPLIT[0] has pulsed. Returns the length of the first beat:
  // for a write its data phase, for a read the clocks from its data phase
  // to HSPLIT; and whether a refresh happened during the transfer.
  localparam logic [1:0] HRESP_SPLIT = 2'b11;
  int ev_split = 0, ev_retry_ok = 0;

  logic [63:0] wbuf [4], rbuf [4];
  task automatic ahb_seq(input logic [21:0] wa, input int n, input bit wr,
                         output int lat0, output bit disturbed);
    int a, d;
    bit retried;
    longint t_acc;
    a = 0; d = -1; lat0 = -1; disturbed = 0; t_acc = 0; retried = 0;
    forever begin
      @(negedge clk);
      if (ref_ack) disturbed = 1;
      if (d >= 0 && hresp == HRESP_SPLIT) begin
        check(!hreadyout, "SPLIT response without its first, not-ready cycle");
        check(!wr, "write split with a single master");
        htrans = 2'b00;   // cancel the beat in the address phase
        @(negedge clk);
        check(hreadyout && hresp == HRESP_SPLIT, "SPLIT response without its second cycle");
        ev_split++;
        hsel = 0;
        while (!hsplit[0]) begin
          @(negedge clk);
          if (ref_ack) disturbed = 1;
        end
        if (d == 0 && lat0 < 0) lat0 = int'(cycle - t_acc);
        retried = 1;
        a = d; d = -1;
        @(negedge clk);
      end
      hsel   = (a < n);
      htrans = (a < n) ? ((d < 0) ? 2'b10 : 2'b11) : 2'b00;
      haddr  = {7'b0, wa + 22'(a), 3'b000};
      hwrite = wr;
      hwdata = (d >= 0 && d < n) ? wbuf[d] : 64'h0;
      if (hreadyout) begin
        if (d >= 0 && !wr) begin
          check(retried, "read completed without a split");
          check(hresp == 2'b00, "HRESP OKAY on the retried read");
          ev_retry_ok++;
          rbuf[d] = hrdata;
        end
        if (d >= 0) retried = 0;
        if (d == 0 && wr) lat0 = int'(cycle - t_acc);
        if (d == n - 1) break;
        if (a == 0) t_acc = cycle;
        d = a; a++;
        if (d > 0) ev_burst_beats++;
      end
    end
    @(negedge clk);
    hsel = 0; htrans = 2'b00;
  endtask

  int lat;
  bit disturbed_q;
  localparam int READ_LAT  = 9 + int'(DEF_NUM_CLK_TRCD) + int'(DEF_CAS_LAT);
  localparam int WRITE_LAT = 7 + int'(DEF_NUM_CLK_TRCD) + int'(DEF_NUM_CLK_TDAL);
  int n_lat_checked = 0;

  task automatic do_write(input logic [21:0] wa, input int n);
    for (int i = 0; i < n; i++) begin
      wbuf[i] = {$urandom, $urandom};
      sb[wa + 22'(i)] = wbuf[i];
    end
    ahb_seq(wa, n, 1'b1, lat, disturbed_q);
    if (!disturbed_q && n == 1) begin
      check(lat == WRITE_LAT, $sformatf("write data phase %0d clocks, expected %0d", lat, WRITE_LAT));
      n_lat_checked++;
    end
  endtask

  task automatic do_read(input logic [21:0] wa, input int n);
    ahb_seq(wa, n, 1'b0, lat, disturbed_q);
    for (int i = 0; i < n; i++)
      check(rbuf[i] == expect_word(wa + 22'(i)),
            $sformatf("read %h: got %h expected %h", wa + 22'(i), rbuf[i], expect_word(wa + 22'(i))));
    if (!disturbed_q && n == 1) begin
      check(lat == READ_LAT, $sformatf("read: %0d clocks from data phase to HSPLIT, expected %0d", lat, READ_LAT));
      n_lat_checked++;
    end
  endtask

  // watchdog
  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int REF_PERIOD = 780;   // ddr_ahb_top REF_INTERVAL default
  logic [21:0] addrs [16];
  longint t_dly;
  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) reset = 0;
    // 200 us power-up delay at 10 ns per clock
    repeat (20000) @(posedge clk);
    @(negedge clk) dly200 = 1;
    t_dly = cycle;
    check(!init_done, "init done before the 200 us delay");
    wait (init_done);
    check(int'(cycle - t_dly) == 9 + 2 * int'(DEF_NUM_CLK_TRP) + 3 * int'(DEF_NUM_CLK_TMRD)
                                 + 2 * int'(DEF_NUM_CLK_TRFC),
          $sformatf("initialization took %0d clocks", cycle - t_dly));
    check(n_lmr == 3 && n_pre == 2 && n_ref == 2, "initialization command counts");

    // an access issued just as a refresh request rises: sweep the issue
    // clock relative to the refresh period (measured from the previous
    // acknowledge, which follows its request by one clock on an idle bus)
    for (int k = 0; k < 8 && ev_ref_first == 0; k++) begin
      @(posedge ref_ack);
      repeat (REF_PERIOD - 4 + k) @(posedge clk);
      do_write(22'h00_0100 + 22'(k), 1);
    end
    check(ev_ref_first > 0, "directed refresh-before-access case");

    // single write and read back
    do_write(22'h01_2345, 1);
    do_read(22'h01_2345, 1);
    // an unwritten word
    do_read(22'h3F_0000, 1);
    // INCR4 bursts
    do_write(22'h12_0040, 4);
    do_read(22'h12_0040, 4);
    // random mix over a small set of addresses, across banks and rows
    for (int i = 0; i < 16; i++) addrs[i] = 22'($urandom);
    for (int i = 0; i < N_RANDOM; i++) begin
      logic [21:0] a;
      a = addrs[$urandom_range(0, 15)];
      if ($urandom_range(0, 1) == 1) do_write(a, ($urandom_range(0, 3) == 0) ? 4 : 1);
      else                           do_read(a, ($urandom_range(0, 3) == 0) ? 4 : 1);
      if ($urandom_range(0, 4) == 0) repeat ($urandom_range(1, 6)) @(negedge clk);
    end
    repeat (20) @(posedge clk);

    check(m_err == 0, $sformatf("DDR model reported %0d protocol errors", m_err));
    check(hresp == 2'b00, "HRESP OKAY");
    // every mechanism happened
    check(init_done, "initialization completed");
    check(n_read > 0 && n_write > 0, "read and write cycles ran");
    check(ev_burst_beats > 0, "burst beats ran");
    check(ev_refresh_cycles > 0 && n_ref > 2, "refresh cycles ran");
    check(ev_ref_first > 0, "a refresh took precedence over a waiting access");
    check(ev_wait > 0, "wait states inserted");
    check(ev_split > 0, "reads split");
    check(ev_retry_ok > 0 && ev_retry_ok == ev_split, $sformatf("%0d retried reads for %0d splits",
                                                                ev_retry_ok, ev_split));
    check(n_lat_checked > 10, "cycle length checked");
    $display("mechanisms: reads=%0d writes=%0d burst_beats=%0d refreshes=%0d ref_before_access=%0d wait_states=%0d splits=%0d",
             n_read, n_write, ev_burst_beats, n_ref - 2, ev_ref_first, ev_wait, ev_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
