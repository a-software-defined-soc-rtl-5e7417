// tb_flit_switch: three inputs in a 10 ns clock send packets of 1 to 3 flits
// to two outputs in a 7 ns clock (route chosen per packet at random, plus
// a few flits with an out-of-range route that must vanish).  Outputs stall
// at random.  Checks that every routed flit arrives at the output it named,
// in order per (input, output) pair, that packets arrive whole, and that
// nothing is duplicated or lost.
module tb_flit_switch;
  import bridge_pkg::*;
  localparam int NI = 3, NO = 2;
  logic in_clk = 0, out_clk = 0, in_rst_n = 0, out_rst_n = 0;
  always #5 in_clk = ~in_clk;
  always #3.5 out_clk = ~out_clk;
  int checks = 0, failures = 0;

  flit_t in [NI]; logic in_valid [NI], in_ready [NI];
  flit_t out [NO]; logic out_valid [NO], out_ready [NO];
  flit_switch #(.NI(NI), .NO(NO), .DEPTH(4)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] expq [NO][NI][$];
  int expected = 0, received = 0, done_src = 0;

  for (genvar i = 0; i < NI; i++) begin : g_src
    initial begin
      automatic int k = 0;
      in[i] = '0; in_valid[i] = 0;
      wait (in_rst_n);
      for (int p = 0; p < 40; p++) begin
        automatic int len = 1 + $urandom % 3;
        automatic int o = (p % 13 == 12) ? NO + 1 : $urandom % NO;
        for (int f = 0; f < len; f++) begin
          in[i].route = 8'(o); in[i].src = 8'(i); in[i].data = 128'(k); in[i].eop = f == len - 1;
          in_valid[i] = 1;
          do @(posedge in_clk); while (!in_ready[i]);
          if (o < NO) begin expq[o][i].push_back(32'(k)); expected++; end
          #1 in_valid[i] = 0; k++;
        end
      end
      done_src++;
    end
  end

  int owner [NO];
  for (genvar o = 0; o < NO; o++) begin : g_sink
    initial owner[o] = -1;
    always @(posedge out_clk) begin
      out_ready[o] <= ($urandom % 4) != 0;
      if (out_rst_n && out_valid[o] && out_ready[o]) begin
        automatic int i = int'(out[o].src);
        chk(32'(out[o].route) == o, "arrived at the output it named");
        chk(i < NI && expq[o][i].size() > 0 && out[o].data == 128'(expq[o][i][0]), "order per pair");
        chk(owner[o] == -1 || owner[o] == i, "packet whole");
        if (i < NI && expq[o][i].size() > 0) void'(expq[o][i].pop_front());
        owner[o] = out[o].eop ? -1 : i;
        received++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge in_clk); #1 in_rst_n = 1; out_rst_n = 1;
    wait (done_src == NI);
    repeat (40) @(posedge out_clk);
    chk(received == expected && expected > 100, $sformatf("all %0d flits delivered (%0d)", expected, received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge in_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
