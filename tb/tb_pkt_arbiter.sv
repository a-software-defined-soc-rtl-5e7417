// tb_pkt_arbiter: three queues offer packets of 1 to 4 flits; queue 1 stops
// in the middle of a packet for a while.  Checks that packets leave whole
// (no flit of another queue inside an open packet, even while its owner is
// empty), that each queue's flits keep their order, and that with all
// queues saturated with one-flit packets each queue gets one third of the
// output (round robin).
module tb_pkt_arbiter;
  import bridge_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  flit_t in [N]; logic in_valid [N], in_ready [N];
  flit_t out; logic out_valid, out_ready;
  pkt_arbiter #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // each source: flit k of queue q has data {q, k}; packet length 1 + (pkt % 4)
  int sent [N];
  for (genvar q = 0; q < N; q++) begin : g_src
    initial begin
      automatic int k = 0;
      in[q] = '0; in_valid[q] = 0;
      wait (rst_n);
      for (int p = 0; p < 20; p++) begin
        automatic int len = 1 + (p % 4);
        for (int f = 0; f < len; f++) begin
          if (q == 1 && p == 2 && f == 1) begin in_valid[q] = 0; repeat (15) @(posedge clk); #1; end
          in[q].data = {96'(q), 32'(k)}; in[q].eop = f == len - 1; in_valid[q] = 1;
          do @(posedge clk); while (!in_ready[q]);
          #1 in_valid[q] = 0; k++;
        end
      end
      sent[q] = k;
    end
  end

  int owner = -1, nextk [N], got [N], total = 0;
  always @(posedge clk) begin
    out_ready <= 1'b1;
    if (rst_n && out_valid && out_ready) begin
      automatic int q = int'(out.data[127:32]);
      automatic int k = int'(out.data[31:0]);
      chk(owner == -1 || owner == q, "no interleaving inside a packet");
      chk(k == nextk[q], $sformatf("per-queue order q%0d k%0d exp %0d", q, k, nextk[q]));
      nextk[q]++; got[q]++; total++;
      owner = out.eop ? -1 : q;
    end
  end

  initial begin
    for (int q = 0; q < N; q++) begin nextk[q] = 0; got[q] = 0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    wait (total == 3 * (20 * 10 / 4));   // 50 flits per queue
    chk(got[0] == 50 && got[1] == 50 && got[2] == 50, "all flits delivered");
    // fairness: all queues saturated with one-flit packets for 30 cycles
    for (int q = 0; q < N; q++) got[q] = 0;
    for (int c = 0; c < 30; c++) begin
      for (int q = 0; q < N; q++) begin
        in[q].data = {96'(q), 32'(nextk[q])}; in[q].eop = 1; in_valid[q] = 1;
      end
      @(posedge clk); #1;
    end
    for (int q = 0; q < N; q++) in_valid[q] = 0;
    chk(got[0] == 10 && got[1] == 10 && got[2] == 10,
        $sformatf("round robin share %0d/%0d/%0d of 30", got[0], got[1], got[2]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
