// tb_ahb_slave: checks the AHB slave against a stand-in for the controller.
//
// Two AHB masters (HMASTER 0 and 1) share the bus through a simple
// ownership token, standing in for the arbiter: a master holds the bus for
// one sequence (a single transfer or an INCR4 burst), gives it up when it
// is split, waits for its HSPLIT bit and then retries the split beat and
// continues. A responder plays the command state machine: it sometimes runs
// a refresh first (cstate c_AR for a few clocks while the request waits),
// then shows c_ACTIVE for one clock, records sys_a, sys_r_wn and sys_wdata,
// and after a random delay pulses sys_cyc_end (write) or sys_d_valid with a
// word derived from the address (read).
// Phase 1 runs master 0 alone, phase 2 runs both masters at once, so that
// transfers meet a slave busy with the other master's read.
// Checked: one system cycle per beat and none for IDLE transfers, split
// responses or retries; sys_a = HADDR[24:3]; direction and write data of
// each beat; read data of each beat on HRDATA at the retry; every read split
// and answered on retry with no wait state; the two-cycle SPLIT response;
// HREADYOUT low during a write until the clock after sys_cyc_end; HSPLIT
// only for masters that were split; HRESP OKAY on every completed beat.
// Counted and required: reads split, writes split because the slave was
// busy with a read, one HSPLIT release per split.
`timescale 1ns/1ps
module tb_ahb_slave;
  import ddr_pkg::*;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  localparam logic [1:0] HRESP_SPLIT = 2'b11;

  logic        hsel = 0, hwrite = 0, hreadyout;
  logic [31:0] haddr = 0;
  logic [1:0]  htrans = 0, hresp;
  logic [3:0]  hmaster = 0;
  logic [15:0] hsplit;
  logic [63:0] hwdata = 0, hrdata;
  logic [21:0] sys_a;
  logic        adsn, r_wn, cyc_end = 0, d_valid = 0;
  logic [63:0] sys_wdata, sys_rdata = 0;
  cstate_t     cst = C_IDLE;

  ahb_slave dut (
    .hclk(clk), .reset(reset), .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hwdata(hwdata), .hready(hreadyout), .hmaster(hmaster), .hreadyout(hreadyout),
    .hresp(hresp), .hrdata(hrdata), .hsplit(hsplit),
    .sys_a(sys_a), .sys_adsn(adsn), .sys_r_wn(r_wn), .sys_wdata(sys_wdata), .cstate(cst),
    .sys_cyc_end(cyc_end), .sys_rdata(sys_rdata), .sys_d_valid(d_valid)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL at %0t: %s", $time, s); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rd_val(input logic [21:0] a);
    return {10'h2A5, a, 10'h15A, a};
  endfunction

  // responder: log of system cycles
  logic [21:0] log_a [$];
  logic        log_r [$];
  logic [63:0] log_w [$];
  initial begin
    forever begin
      @(negedge clk);
      if (!reset && !adsn) begin
        if ($urandom_range(0, 3) == 0) begin
          cst = C_AR;
          repeat ($urandom_range(1, 6)) @(negedge clk);
        end
        cst = C_ACTIVE;
        @(negedge clk);
        log_a.push_back(sys_a); log_r.push_back(r_wn); log_w.push_back(sys_wdata);
        cst = C_TRCD;
        repeat ($urandom_range(1, 8)) @(negedge clk);
        cst = C_IDLE;
        if (log_r[$]) begin sys_rdata = rd_val(log_a[$]); d_valid = 1; end
        else begin
          check(!hreadyout, "HREADYOUT high before the write completed");
          cyc_end = 1;
        end
        @(negedge clk);
        if (!log_r[$]) check(hreadyout, "HREADYOUT not high the clock after sys_cyc_end");
        d_valid = 0; cyc_end = 0; sys_rdata = '0;
      end
    end
  end

  // HSPLIT monitor: only masters that were split and not yet released
  bit split_seen [2];
  bit split_wait [2];
  int n_released = 0;
  always @(negedge clk) begin
    if (!reset) begin
      check(hsplit[15:2] == '0, "HSPLIT for a master that does not exist");
      for (int m = 0; m < 2; m++)
        if (hsplit[m]) begin
          check(split_wait[m], $sformatf("HSPLIT[%0d] for a master that was not split", m));
          split_seen[m] = 1;
          n_released++;
        end
    end
  end

  // bus ownership (arbiter stand-in)
  int owner = -1;
  task automatic acquire(input int mid);
    @(negedge clk);
    while (owner != -1) @(negedge clk);
    owner = mid;
  endtask
  task automatic release_bus();
    hsel = 0; htrans = 2'b00;
    owner = -1;
  endtask

  // master: one sequence of n beats (1 single, 4 INCR4) at consecutive addresses
  logic [63:0] wb [2][4], rb [2][4];
  int n_beats = 0, n_read_split = 0, n_busy_split = 0;  // busy: writes split
  task automatic ahb_seq(input int mid, input logic [21:0] wa, input int n, input bit wr);
    int a, d, dwait;
    bit retried;
    a = 0; d = -1; retried = 0; dwait = 0;
    acquire(mid);
    forever begin
      if (d >= 0 && hresp == HRESP_SPLIT) begin
        check(!hreadyout, "SPLIT response without its first, not-ready cycle");
        htrans = 2'b00;   // cancel the transfer in the address phase
        @(negedge clk);
        check(hreadyout && hresp == HRESP_SPLIT, "SPLIT response without its second cycle");
        if (wr) n_busy_split++; else n_read_split++;
        split_wait[mid] = 1;
        release_bus();
        while (!split_seen[mid]) @(negedge clk);
        split_seen[mid] = 0; split_wait[mid] = 0;
        retried = !wr;
        a = d; d = -1; dwait = 0;
        acquire(mid);
      end
      hmaster = 4'(mid);
      hsel    = (a < n);
      htrans  = (a < n) ? ((d < 0) ? 2'b10 : 2'b11) : 2'b00;
      haddr   = {7'h55, wa + 22'(a), 3'b101};
      hwrite  = wr;
      hwdata  = (d >= 0 && d < n) ? wb[mid][d] : 64'hBAD0_BAD0_BAD0_BAD0;
      if (d >= 0 && !hreadyout) dwait++;
      if (hreadyout) begin
        if (d >= 0) begin
          check(hresp == 2'b00, "HRESP OKAY at the end of a data phase");
          if (!wr) begin
            check(retried, "read completed without being split");
            check(dwait == 0, $sformatf("retried read took %0d wait states", dwait));
            rb[mid][d] = hrdata;
          end
          retried = 0;
        end
        if (d == n - 1) break;
        d = a; a++;
        dwait = 0;
      end
      @(negedge clk);
    end
    @(negedge clk);
    release_bus();
    n_beats += n;
  endtask

  // a whole sequence with its checks; log entries of other masters may interleave
  task automatic run_seq(input int mid, input bit alone);
    int n, base;
    bit wr;
    logic [21:0] wa;
    n = ($urandom_range(0, 1) == 1) ? 4 : 1;
    wr = 1'($urandom_range(0, 1));
    wa = 22'($urandom);
    for (int i = 0; i < n; i++) wb[mid][i] = {$urandom, $urandom};
    base = log_a.size();
    ahb_seq(mid, wa, n, wr);
    if (alone)
      check(log_a.size() == base + n, $sformatf("%0d system cycles for %0d beats", log_a.size() - base, n));
    for (int i = 0; i < n; i++) begin
      bit found;
      found = 0;
      for (int k = base; k < log_a.size(); k++)
        if (log_a[k] == wa + 22'(i) && log_r[k] == !wr && (!wr || log_w[k] == wb[mid][i])) found = 1;
      check(found, $sformatf("no system cycle for beat %0d at %h (write %0b)", i, wa + 22'(i), wr));
      if (!wr) check(rb[mid][i] == rd_val(wa + 22'(i)), $sformatf("read data %h", rb[mid][i]));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    // IDLE and non-selected transfers start nothing
    hsel = 1; htrans = 2'b00; haddr = 32'h100;
    repeat (5) @(negedge clk);
    hsel = 0; htrans = 2'b10;
    repeat (5) @(negedge clk);
    htrans = 2'b00;
    check(log_a.size() == 0, "cycle started by an IDLE or unselected transfer");
    check(hreadyout, "HREADYOUT high while idle");
    // phase 1: one master
    for (int k = 0; k < 60; k++) begin
      run_seq(0, 1'b1);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // phase 2: two masters
    fork
      for (int k = 0; k < 40; k++) begin
        run_seq(0, 1'b0);
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      for (int k = 0; k < 40; k++) begin
        run_seq(1, 1'b0);
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    join
    repeat (5) @(negedge clk);
    check(log_a.size() == n_beats, $sformatf("%0d system cycles for %0d beats", log_a.size(), n_beats));
    check(hreadyout && adsn, "slave idle at the end");
    check(n_read_split > 0, "reads were split");
    check(n_busy_split > 0, "writes were split because the slave was busy");
    check(n_released == n_read_split + n_busy_split, $sformatf("%0d HSPLIT releases for %0d splits",
                                                               n_released, n_read_split + n_busy_split));
    $display("splits: reads %0d, writes %0d, releases %0d", n_read_split, n_busy_split, n_released);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
