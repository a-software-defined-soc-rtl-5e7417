// tb_memport: configures memport regions through the configuration port and
// checks address rewriting, output-port steering, W inheritance, first-match
// priority, miss dropping and run-time reconfiguration.  Expected values are
// computed in the testbench from the region values it wrote.
module tb_memport;
  import bridge_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t        cfg;
  flit_t       in, out;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [31:0] miss_count;

  memport #(.ENTRIES(4), .UNIT(8'd3)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wcfg(input logic [7:0] unit, input logic [7:0] idx, input cfg_field_e f,
                      input logic [ADDR_W-1:0] d);
    cfg.we = 1; cfg.unit = unit; cfg.idx = idx; cfg.field = f; cfg.wdata = d;
    @(posedge clk); #1 cfg.we = 0;
  endtask

  task automatic region(input int e, input logic [ADDR_W-1:0] lo, hi, off, input int port);
    wcfg(8'd3, 8'(e), F_LOW, lo);
    wcfg(8'd3, 8'(e), F_HIGH, hi);
    wcfg(8'd3, 8'(e), F_OFFSET, off);
    wcfg(8'd3, 8'(e), F_PORT, ADDR_W'((1 << ROUTE_W) | port));
  endtask

  // send one flit, return what comes out (or time out)
  task automatic send(input chan_e ch, input logic [ADDR_W-1:0] a, input bit eop,
                      output flit_t got, output bit seen);
    in = '0; in.chan = ch; in.addr = a; in.eop = eop; in.data = 128'(a) ^ 128'hF00D;
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    seen = 0;
    for (int i = 0; i < 3 && !seen; i++) begin
      if (out_valid) begin got = out; seen = 1; end
      @(posedge clk); #1;
    end
  endtask

  flit_t g; bit seen;
  initial begin
    cfg = '0; in = '0; in_valid = 0; out_ready = 1;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // unit mismatch must not write
    wcfg(8'd2, 8'd0, F_PORT, ADDR_W'((1 << ROUTE_W) | 1));
    send(CH_AR, 40'h10, 1, g, seen);
    chk(!seen && miss_count == 1, "other unit's config ignored, miss");

    region(0, 40'h0000_1000, 40'h0000_1FFF, 40'h80_0000_0000, 1);
    region(1, 40'h0000_0000, 40'hFF_FFFF_FFFF, 40'h0, 0);    // catch-all, lower priority
    send(CH_AR, 40'h0000_1234, 1, g, seen);
    chk(seen && g.addr == 40'h80_0000_0234 && g.route == 1 && g.chan == CH_AR, "AR rewrite entry 0");
    send(CH_AR, 40'h0000_2000, 1, g, seen);
    chk(seen && g.addr == 40'h0000_2000 && g.route == 0, "AR falls to entry 1");
    send(CH_AW, 40'h0000_1FF0, 0, g, seen);
    chk(seen && g.addr == 40'h80_0000_0FF0 && g.route == 1, "AW rewrite");
    send(CH_W, 40'h0, 0, g, seen);
    chk(seen && g.route == 1 && g.chan == CH_W, "W inherits route 1");
    send(CH_W, 40'h0, 1, g, seen);
    chk(seen && g.route == 1 && g.eop, "last W inherits route 1");

    // invalidate the catch-all: misses are dropped with their data
    wcfg(8'd3, 8'd1, F_PORT, '0);
    send(CH_AW, 40'h0000_3000, 0, g, seen);
    chk(!seen, "missed AW dropped");
    send(CH_W, 40'h0, 1, g, seen);
    chk(!seen, "W of missed AW dropped");
    chk(miss_count == 2, "miss counted");

    // run-time reconfiguration of entry 0
    region(0, 40'h0000_1000, 40'h0000_1FFF, 40'h00_4000_0000, 0);
    send(CH_AR, 40'h0000_1010, 1, g, seen);
    chk(seen && g.addr == 40'h00_4000_0010 && g.route == 0, "reconfigured entry 0");

    // backpressure: output held, flit must wait, then appear unchanged
    out_ready = 0;
    in = '0; in.chan = CH_AR; in.addr = 40'h1020; in.eop = 1; in_valid = 1;
    @(posedge clk); #1 in_valid = 0;
    repeat (4) @(posedge clk);
    #1 chk(out_valid && out.addr == 40'h00_4000_0020, "held under backpressure");
    chk(!in_ready, "in_ready low while full");
    out_ready = 1;
    @(posedge clk); #1 chk(!out_valid, "drained");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
