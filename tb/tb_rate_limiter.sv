// tb_rate_limiter: offers a flit every cycle and counts what passes in 400
// cycles at full rate (expect 400), at a quarter rate (expect 100), at 3/8
// rate (expect 150); then, after an idle gap with burst 4, checks that
// exactly 4 flits pass back to back before the quarter rate resumes.  Also
// checks the throttled flag and that out_ready low stops everything.
module tb_rate_limiter;
  import bridge_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [RL_FRAC:0] rate; logic [7:0] burst;
  flit_t in, out; logic in_valid, in_ready, out_valid, out_ready, throttled;
  rate_limiter dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int passed, thr;
  always @(posedge clk) begin
    if (out_valid && out_ready) passed++;
    if (throttled) thr++;
  end

  task automatic measure(input int cycles, output int n);
    passed = 0;
    repeat (cycles) @(posedge clk);
    #1 n = passed;
  endtask

  int n;
  initial begin
    in = '0; in.eop = 1; in_valid = 0; out_ready = 1; rate = 9'(RL_ONE); burst = 1;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    in_valid = 1;
    measure(400, n); chk(n == 400, $sformatf("full rate %0d/400", n));
    rate = 9'(RL_ONE / 4);
    measure(40, n);  // settle
    thr = 0;
    measure(400, n); chk(n == 100, $sformatf("quarter rate %0d/400", n));
    chk(thr == 300, $sformatf("throttled cycles %0d", thr));
    rate = 9'(3 * RL_ONE / 8);
    measure(40, n);
    measure(400, n); chk(n == 150, $sformatf("3/8 rate %0d/400", n));
    // burst
    rate = 9'(RL_ONE / 4); burst = 4; in_valid = 0;
    repeat (50) @(posedge clk); #1 in_valid = 1;
    measure(4, n); chk(n == 4, $sformatf("burst of 4 back to back: %0d", n));
    measure(4, n); chk(n == 1, $sformatf("then quarter rate: %0d", n));
    out_ready = 0;
    measure(20, n); chk(n == 0 && !in_ready, "out_ready low holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
