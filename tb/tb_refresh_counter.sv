// tb_refresh_counter: checks the refresh request generator.
// A responder acknowledges each request after a random delay for a random
// number of clocks. Checked: no request before enable, the first request
// exactly REF_INTERVAL clocks after enable, one request per interval on
// average, the request held until acknowledged and dropped on the first
// acknowledge clock, and a tick inside an acknowledge raising a new request.
`timescale 1ns/1ps
module tb_refresh_counter;
  localparam int unsigned IV = 50;
  logic clk = 0, reset = 1, en = 0, ack = 0, req;
  always #5 clk = ~clk;
  refresh_counter #(.REF_INTERVAL(IV)) dut (.clk(clk), .reset(reset), .enable(en), .ref_ack(ack), .ref_req(req));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_req = 0, t, wait_c, len;
  bit prev_req = 0, prev_ack = 0;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    repeat (100) begin @(negedge clk); check(!req, "request while disabled"); end
    en = 1; t = 0;
    while (!req) begin @(negedge clk); t++; end
    check(t == IV, $sformatf("first request after %0d clocks", t));
    // serve 100 requests with random latency; the last few with a long ack
    for (int i = 0; i < 100; i++) begin
      while (!req) @(negedge clk);
      n_req++;
      wait_c = $urandom_range(0, 10);
      repeat (wait_c) begin @(negedge clk); check(req, "request dropped before ack"); end
      len = (i >= 95) ? IV + 5 : $urandom_range(1, 10);
      ack = 1;
      @(negedge clk);
      check(!req || i >= 95, "request not dropped on ack");
      repeat (len - 1) @(negedge clk);
      ack = 0;
      @(negedge clk);
      if (i >= 95) check(req, "tick during a long ack raised no new request");
    end
    check(n_req == 100, "requests served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
