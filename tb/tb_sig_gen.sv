// tb_sig_gen: checks the signal generation module.
//
// Drives every istate and cstate, with random system addresses, and checks
// the registered pins one clock later against values worked out by hand
// from the command table and the mode-register layout: LOAD MODE = RAS#,
// CAS#, WE# all low, AUTO REFRESH = L L H, PRECHARGE = L H L with A10 high,
// ACTIVE = L H H with the row, READ = H L H and WRITE = H L L with the
// column and A10 high, NOP = H H H; mode register 0x122 (burst 4,
// sequential, CAS latency 2, DLL reset) on the first MRS and 0x022 on the
// second; extended mode register 0 with BA = 01; CKE low and CS# high only
// in i_IDLE.
`timescale 1ns/1ps
module tb_sig_gen;
  import ddr_pkg::*;

  logic clk = 0, reset = 1, mrs_done = 0;
  always #5 clk = ~clk;
  istate_t ist = I_IDLE;
  cstate_t cst = C_IDLE;
  logic [21:0] sys_a = '0;
  logic csn, cke, rasn, casn, wen;
  logic [12:0] add;
  logic [1:0]  ba;

  sig_gen dut (
    .clk(clk), .reset(reset), .istate(ist), .cstate(cst), .load_mrs_done(mrs_done),
    .sys_a(sys_a), .ddr_csn(csn), .ddr_cke(cke), .ddr_rasn(rasn), .ddr_casn(casn),
    .ddr_wen(wen), .ddr_add(add), .ddr_ba(ba)
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

  // apply one state for one clock and check the pins after the edge
  task automatic apply(input istate_t i, input cstate_t c, input logic [2:0] cmd,
                       input logic [12:0] e_add, input logic [1:0] e_ba, input bit chk_addr);
    @(negedge clk);
    ist = i; cst = c;
    @(negedge clk);
    check({rasn, casn, wen} == cmd,
          $sformatf("%s/%s: command %b expected %b", i.name(), c.name(), {rasn, casn, wen}, cmd));
    check(cke == (i != I_IDLE) && csn == (i == I_IDLE), "CKE/CS#");
    if (chk_addr) begin
      check(add == e_add, $sformatf("%s/%s: address %h expected %h", i.name(), c.name(), add, e_add));
      check(ba == e_ba, $sformatf("%s/%s: bank %0d expected %0d", i.name(), c.name(), ba, e_ba));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    // initialization commands
    apply(I_IDLE,  C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_NOP,   C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_PRE,   C_IDLE, 3'b010, 13'h400, 2'd0, 1);
    apply(I_TRP,   C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_EMRS,  C_IDLE, 3'b000, 13'h000, 2'd1, 1);
    apply(I_TMRD,  C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    mrs_done = 0;
    apply(I_MRS,   C_IDLE, 3'b000, 13'h122, 2'd0, 1);
    mrs_done = 1;
    apply(I_AR1,   C_IDLE, 3'b001, 13'h0, 2'd0, 0);
    apply(I_TRFC1, C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_AR2,   C_IDLE, 3'b001, 13'h0, 2'd0, 0);
    apply(I_TRFC2, C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_MRS,   C_IDLE, 3'b000, 13'h022, 2'd0, 1);
    // the command machine's states are ignored until i_ready
    apply(I_TMRD,  C_ACTIVE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_READY, C_IDLE, 3'b111, 13'h0, 2'd0, 0);
    apply(I_READY, C_AR,   3'b001, 13'h0, 2'd0, 0);
    apply(I_READY, C_TRFC, 3'b111, 13'h0, 2'd0, 0);
    for (int k = 0; k < 50; k++) begin
      logic [21:0] a;
      a = 22'($urandom);
      sys_a = a;
      apply(I_READY, C_ACTIVE, 3'b011, a[19:7], a[21:20], 1);
      apply(I_READY, C_TRCD,   3'b111, 13'h0, 2'd0, 0);
      if (k % 2 == 0) begin
        apply(I_READY, C_READA, 3'b101, {3'b001, 1'b0, a[6:0], 2'b00}, a[21:20], 1);
        apply(I_READY, C_CL,    3'b111, 13'h0, 2'd0, 0);
        apply(I_READY, C_RDATA, 3'b111, 13'h0, 2'd0, 0);
      end else begin
        apply(I_READY, C_WRITEA, 3'b100, {3'b001, 1'b0, a[6:0], 2'b00}, a[21:20], 1);
        apply(I_READY, C_WDATA,  3'b111, 13'h0, 2'd0, 0);
        apply(I_READY, C_TDAL,   3'b111, 13'h0, 2'd0, 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
