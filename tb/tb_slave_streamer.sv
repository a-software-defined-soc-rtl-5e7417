// tb_slave_streamer: feeds request flits and checks the AXI4 transfers to the
// slave, including the widened ID {xport, src, id}; then feeds B and R
// responses and checks the response flits, whose route must be the xport
// recovered from the ID.
module tb_slave_streamer;
  import bridge_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  flit_t rx, tx; logic rx_valid, rx_ready, tx_valid, tx_ready;
  sax_t aw, ar; w_t w; sb_t b; sr_t r;
  logic aw_valid, aw_ready, w_valid, w_ready, ar_valid, ar_ready, b_valid, b_ready, r_valid, r_ready;

  slave_streamer dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rx = '0; rx_valid = 0; aw_ready = 0; w_ready = 0; ar_ready = 0;
    b = '0; b_valid = 0; r = '0; r_valid = 0; tx_ready = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    rx.chan = CH_AW; rx.xport = 8'd1; rx.src = 8'd3; rx.id = 6'd17; rx.addr = 40'h4000_0100; rx.len = 1; rx_valid = 1;
    #1 chk(aw_valid && !w_valid && !ar_valid && !rx_ready, "AW offered, waits for ready");
    chk(aw.id == {8'd1, 8'd3, 6'd17} && aw.addr == 40'h4000_0100 && aw.len == 1, "AW fields, widened ID");
    aw_ready = 1; #1 chk(rx_ready, "AW taken");
    rx.chan = CH_W; rx.data = 128'h1234; rx.strb = 16'h00FF; rx.last = 1; aw_ready = 0; w_ready = 1;
    #1 chk(w_valid && !aw_valid && w.data == 128'h1234 && w.strb == 16'h00FF && w.last && rx_ready, "W");
    rx.chan = CH_AR; rx.xport = 8'd0; rx.src = 8'd1; rx.id = 6'd2; w_ready = 0; ar_ready = 1;
    #1 chk(ar_valid && ar.id == {8'd0, 8'd1, 6'd2} && rx_ready, "AR");
    rx_valid = 0;
    // responses: both at once, round robin B then R
    b.id = {8'd1, 8'd3, 6'd17}; b.resp = 2'b00; b_valid = 1;
    r.id = {8'd0, 8'd1, 6'd2}; r.data = 128'hBEEF; r.last = 1; r_valid = 1;
    #1 chk(tx_valid && tx.chan == CH_B && tx.route == 1 && tx.src == 3 && tx.id == 17 && tx.eop, "B flit first");
    chk(!b_ready && !r_ready, "no ready without tx_ready");
    tx_ready = 1;
    @(posedge clk); #1 b_valid = 0;
    #1 chk(tx_valid && tx.chan == CH_R && tx.route == 0 && tx.src == 1 && tx.id == 2 && tx.data == 128'hBEEF && tx.last && tx.eop, "R flit");
    chk(r_ready, "R ready");
    @(posedge clk); #1 r_valid = 0;
    #1 chk(!tx_valid, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
