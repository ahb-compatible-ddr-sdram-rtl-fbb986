// tb_clk_counter: checks the clock counter against a reference count.
// Random synchronous clears; a second, 3-bit instance checks saturation.
`timescale 1ns/1ps
module tb_clk_counter;
  logic clk = 0, reset = 1, sr = 0;
  always #5 clk = ~clk;
  logic [31:0] cnt;
  logic [2:0]  cnt3;
  clk_counter                dut  (.clk(clk), .reset(reset), .sync_reset(sr), .count(cnt));
  clk_counter #(.CNT_W(3))   dut3 (.clk(clk), .reset(reset), .sync_reset(sr), .count(cnt3));

  int checks = 0, failures = 0;
  longint ref_cnt;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    ref_cnt = 1;  // one rising edge passes between reset release and the first check
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks += 2;
      if (cnt != 32'(ref_cnt)) begin failures++; $display("count %0d expected %0d", cnt, ref_cnt); end
      if (cnt3 != 3'((ref_cnt > 7) ? 7 : ref_cnt)) begin failures++; $display("count3 %0d", cnt3); end
      sr = ($urandom_range(0, 19) == 0);
      ref_cnt = sr ? 0 : ref_cnt + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
