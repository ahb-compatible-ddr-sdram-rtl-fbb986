// ddr_sdram_model: behavioural model of a x16, four-bank DDR SDRAM device
// for simulation only (not synthesizable).
//
// Samples the command pins on each rising edge of clk (CS# low, RAS#, CAS#,
// WE# as in the JEDEC command table) and models: LOAD MODE (burst length and
// CAS latency taken from the mode register), PRECHARGE (one bank, or all
// with A10), ACTIVE, READ/WRITE with optional auto precharge (A10), AUTO
// REFRESH. Data moves at double data rate: write word j of a burst is
// sampled at the end of half-period j starting one clock after the WRITE
// (write latency 1); read word j is driven during half-period j starting CAS
// latency clocks after the READ. Storage is a sparse associative array;
// words never written read as a function of their address.
//
// Protocol checks (each counted in errors): a command before the
// initialization sequence allows it, ACTIVE to an open bank, READ/WRITE to a
// closed bank, and the minimum clock spacings tRCD, tRP, tRFC, tMRD and
// write-to-ACTIVE tDAL given as parameters. Counters report how many of each
// command were seen.
module ddr_sdram_model #(
  parameter int unsigned DQ_W  = 16,
  parameter int unsigned AW    = 13,
  parameter int TRCD           = 2,   // clocks
  parameter int TRP            = 2,
  parameter int TRFC           = 8,
  parameter int TMRD           = 2,
  parameter int TDAL           = 4    // last write data clock to next ACTIVE
) (
  input  logic            clk,
  input  logic            csn,
  input  logic            cke,
  input  logic            rasn,
  input  logic            casn,
  input  logic            wen,
  input  logic [AW-1:0]   addr,
  input  logic [1:0]      ba,
  input  logic [DQ_W-1:0] dq_in,     // from the controller
  input  logic            dq_in_en,
  output logic [DQ_W-1:0] dq_out,    // to the controller
  output int              errors,
  output int              n_act, n_read, n_write, n_ref, n_pre, n_lmr
);

  logic [DQ_W-1:0] mem [logic [31:0]];
  logic            open_b [4];
  logic [AW-1:0]   row_b  [4];
  longint          t_act  [4];
  longint          t_pre  [4];
  longint          cyc;
  longint          t_ref, t_lmr, t_wlast;
  int              bl, cl;
  logic            mr_loaded, emr_loaded;
  int              prec_all_cnt;

  // pending burst
  int              rd_left, wr_left, rd_start_cyc, wr_start_cyc;
  logic [31:0]     rd_base, wr_base;
  int              rd_idx, wr_idx;

  function automatic logic [DQ_W-1:0] init_val(input logic [31:0] a);
    return DQ_W'(a * 32'h9E37 + 32'h1234);
  endfunction

  function automatic logic [31:0] loc(input logic [1:0] b, input logic [AW-1:0] r, input int c);
    return {b, r[12:0], 17'(c)};
  endfunction

  initial begin
    errors = 0; n_act = 0; n_read = 0; n_write = 0; n_ref = 0; n_pre = 0; n_lmr = 0;
    cyc = 0; t_ref = -100; t_lmr = -100; t_wlast = -100;
    bl = 4; cl = 2; mr_loaded = 0; emr_loaded = 0; prec_all_cnt = 0;
    rd_left = 0; wr_left = 0; rd_idx = 0; wr_idx = 0;
    dq_out = '0;
    for (int i = 0; i < 4; i++) begin open_b[i] = 0; row_b[i] = '0; t_act[i] = -100; t_pre[i] = -100; end
  end

  task automatic err(input string s);
    errors++;
    $display("DDR model error at cycle %0d: %s", cyc, s);
  endtask

  // Read data: word j during half-period j from the clock CL after READ.
  task automatic drive_read();
    logic [31:0] a;
    if (rd_left > 0 && cyc >= rd_start_cyc) begin
      // sequential burst wraps inside the burst-aligned block
      a = (rd_base & ~32'(bl - 1)) | ((rd_base + 32'(rd_idx)) & 32'(bl - 1));
      dq_out <= mem.exists(a) ? mem[a] : init_val(a);
      rd_idx++; rd_left--;
    end
  endtask

  task automatic sample_write();
    logic [31:0] a;
    if (wr_left > 0 && cyc >= wr_start_cyc) begin
      if (!dq_in_en) err("write data not driven");
      a = (wr_base & ~32'(bl - 1)) | ((wr_base + 32'(wr_idx)) & 32'(bl - 1));
      mem[a] = dq_in;
      wr_idx++; wr_left--;
    end
  endtask

  // Command decode.
  task automatic decode();
    cyc++;
    if (cke && !csn) begin
      if (t_lmr > cyc - TMRD && {rasn, casn, wen} != 3'b111) err("tMRD violated");
      unique case ({rasn, casn, wen})
        3'b000: begin // LOAD MODE
          n_lmr++;
          for (int i = 0; i < 4; i++) if (open_b[i]) err("LOAD MODE with open bank");
          if (ba == 2'b01) emr_loaded = 1;
          else if (ba == 2'b00) begin
            if (!emr_loaded) err("mode register before extended mode register");
            mr_loaded = 1;
            bl = 1 << addr[2:0];
            cl = int'(addr[6:4]);
          end
          t_lmr = cyc;
        end
        3'b001: begin // AUTO REFRESH
          n_ref++;
          if (!mr_loaded) err("refresh before mode register");
          for (int i = 0; i < 4; i++) begin
            if (open_b[i]) err("refresh with open bank");
            if (t_pre[i] > cyc - TRP) err("tRP violated before refresh");
          end
          if (t_ref > cyc - TRFC) err("tRFC violated");
          t_ref = cyc;
        end
        3'b010: begin // PRECHARGE
          n_pre++;
          if (addr[10]) begin
            prec_all_cnt++;
            for (int i = 0; i < 4; i++) begin open_b[i] = 0; t_pre[i] = cyc; end
          end else begin
            open_b[ba] = 0; t_pre[ba] = cyc;
          end
        end
        3'b011: begin // ACTIVE
          n_act++;
          if (prec_all_cnt < 2 || n_ref < 2) err("ACTIVE before initialization is complete");
          if (open_b[ba]) err("ACTIVE to an open bank");
          if (t_pre[ba] > cyc - TRP) err("tRP violated");
          if (t_ref > cyc - TRFC) err("tRFC violated before ACTIVE");
          if (t_wlast > cyc - TDAL) err("tDAL violated");
          open_b[ba] = 1; row_b[ba] = addr; t_act[ba] = cyc;
        end
        3'b101, 3'b100: begin // READ / WRITE
          if (!open_b[ba]) err("READ/WRITE to a closed bank");
          if (t_act[ba] > cyc - TRCD) err("tRCD violated");
          if (casn == 1'b0 && wen == 1'b1) begin
            n_read++;
            rd_base = loc(ba, row_b[ba], int'(addr[9:0]));
            rd_start_cyc = int'(cyc) + cl; rd_left = bl; rd_idx = 0;
          end else begin
            n_write++;
            wr_base = loc(ba, row_b[ba], int'(addr[9:0]));
            wr_start_cyc = int'(cyc) + 1; wr_left = bl; wr_idx = 0;
            t_wlast = cyc + bl / 2;
          end
          if (addr[10]) begin open_b[ba] = 0; t_pre[ba] = cyc + bl / 2 + 2; end
        end
        default: ;
      endcase
    end
  endtask

  // Each clock has two half-period slots: the rising edge of clk starts
  // slot 0, the falling edge slot 1. At an edge the write word of the slot
  // that ends is sampled first, then the command is decoded (rising edge
  // only), then the read word of the slot that starts is driven.
  always @(posedge clk) begin
    sample_write();
    decode();
    drive_read();
  end
  always @(negedge clk) begin
    sample_write();
    drive_read();
  end

endmodule
