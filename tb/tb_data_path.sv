// tb_data_path: checks the data path on its own.
//
// The testbench plays both neighbours: it steps cstate and the clock counter
// through read and write cycles as the command state machine would (c_READA,
// CL clocks of c_cl, BL/2 clocks of c_rdata; c_WRITEA, BL/2 clocks of
// c_wdata, c_tDAL) and acts as the DDR device on the DQ pins. With c_READA in
// clock n it drives read word j during half period j from clock n + 2 + CL
// (one clock for the registered READ command, then the CAS latency); with
// c_WRITEA in clock n it expects write word j during half period j from
// clock n + 3 (registered WRITE command, then write latency 1).
// Checked: every written word on DQ, DQ enable exactly over the four write
// half periods, DQS toggling once per write word, every read word in
// sys_rdata, and sys_d_valid high in clock n + CL + BL/2 + 3 only.
`timescale 1ns/1ps
module tb_data_path;
  import ddr_pkg::*;

  localparam int CL = int'(DEF_CAS_LAT);
  localparam int BL = int'(DEF_BURST_LEN);

  logic clk = 1'b0, clk2x = 1'b1, reset = 1'b1;
  always #2.5 begin
    clk2x = ~clk2x;
    if (clk2x) clk = ~clk;
  end

  istate_t ist = I_READY;
  cstate_t cst = C_IDLE;
  logic [31:0] cnt = 0;
  logic [63:0] wdata = 0, rdata;
  logic        valid, dq_oe, dqs_o, dqs_oe;
  logic [15:0] dq_o, dq_i = 0;

  data_path dut (
    .clk(clk), .clk2x(clk2x), .reset(reset), .istate(ist), .cstate(cst), .clk_cnt(cnt),
    .sys_wdata(wdata), .sys_rdata(rdata), .sys_d_valid(valid), .dq_o(dq_o), .dq_oe(dq_oe),
    .dq_i(dq_i), .dqs_o(dqs_o), .dqs_oe(dqs_oe)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL at %0t: %s", $time, s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DDR side: slot = 2 * clock + half
  longint cyc = 0;
  longint rd_slot0 = -100, wr_slot0 = -100, valid_cyc = -100;
  logic [63:0] rd_word, wr_word, wr_seen;
  int n_dqs_edges = 0;
  logic dqs_prev = 0;

  task automatic ddr_half(input int half);
    longint slot;
    int j;
    // sample the slot that ends here
    slot = 2 * cyc + longint'(half) - 1;
    j = int'(slot - wr_slot0);
    if (j >= 0 && j < BL) begin
      check(dq_oe, $sformatf("DQ not driven in write slot %0d", j));
      wr_seen[16*j +: 16] = dq_o;
    end else if (!reset) check(!dq_oe, "DQ driven outside a write burst");
    // drive the slot that starts here
    slot = 2 * cyc + longint'(half);
    j = int'(slot - rd_slot0);
    dq_i <= (j >= 0 && j < BL) ? rd_word[16*j +: 16] : 16'hDEAD;
  endtask

  always @(posedge clk) begin
    cyc++;
    ddr_half(0);
  end
  always @(negedge clk) begin
    ddr_half(1);
    if (!reset) begin
      check(valid == (cyc == valid_cyc), $sformatf("sys_d_valid=%0b in clock %0d (expected in %0d)",
                                                   valid, cyc, valid_cyc));
      if (valid) check(rdata == rd_word, $sformatf("read %h expected %h", rdata, rd_word));
    end
  end
  always @(posedge clk2x) begin
    if (dqs_o != dqs_prev) n_dqs_edges++;
    dqs_prev = dqs_o;
  end

  // one clock of command-machine state, set at the falling edge so that it
  // is seen by the rising edge that closes clock cyc
  task automatic state(input cstate_t s, input int count);
    @(negedge clk);
    cst = s; cnt = 32'(count);
  endtask

  task automatic do_read(input logic [63:0] w);
    rd_word = w;
    state(C_READA, 0);
    rd_slot0 = 2 * (cyc + 2 + longint'(CL));
    valid_cyc = cyc + longint'(CL + BL / 2 + 3);
    for (int i = 0; i < CL; i++) state(C_CL, i);
    for (int i = 0; i < BL / 2; i++) state(C_RDATA, i);
    state(C_IDLE, 0);
    repeat (4) state(C_IDLE, 0);
  endtask

  task automatic do_write(input logic [63:0] w);
    int e0;
    state(C_ACTIVE, 0);
    wdata = w;
    state(C_WRITEA, 0);
    wr_slot0 = 2 * (cyc + 3);
    e0 = n_dqs_edges;
    for (int i = 0; i < BL / 2; i++) begin
      state(C_WDATA, i);
      wdata = ~w;   // the word must have been latched in c_WRITEA
    end
    for (int i = 0; i < 3; i++) state(C_TDAL, i);
    repeat (3) state(C_IDLE, 0);
    check(wr_seen == w, $sformatf("written %h expected %h", wr_seen, w));
    check(n_dqs_edges - e0 == BL, $sformatf("%0d DQS edges in a write burst", n_dqs_edges - e0));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 60; k++) begin
      if ($urandom_range(0, 1) == 1) do_write({$urandom, $urandom});
      else                           do_read({$urandom, $urandom});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
