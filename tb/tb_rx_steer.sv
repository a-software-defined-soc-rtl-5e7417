// tb_rx_steer: sends request and response flits as a transceiver would (no
// backpressure) and checks the route and xport the unit gives them: AW/AR by
// address bits above SLAVE_SEL_LSB modulo S, W following its AW, R/B to
// S + src.  Holding out_ready low must count dropped flits.
module tb_rx_steer;
  import bridge_pkg::*;
  localparam int S = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  flit_t rx, out; logic rx_valid, out_valid, out_ready; logic [31:0] drop_count;
  rx_steer #(.IDX(8'd5), .S(S), .SLAVE_SEL_LSB(20)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put(input chan_e ch, input logic [ADDR_W-1:0] a, input int src,
                     input int exp_route, input bit is_req, input string what);
    rx = '0; rx.chan = ch; rx.addr = a; rx.src = 8'(src); rx.data = 128'(a); rx_valid = 1;
    @(posedge clk); #1 rx_valid = 0;
    chk(out_valid && out.route == 8'(exp_route) && out.data == 128'(a) &&
        (!is_req || out.xport == 8'd5), what);
  endtask

  initial begin
    rx = '0; rx_valid = 0; out_ready = 1;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    put(CH_AR, 40'h0_0000, 0, 0, 1, "AR slave 0");
    put(CH_AR, 40'h1_0000 << 4, 0, 1, 1, "AR slave 1");
    put(CH_AR, 40'h5_0000 << 4, 0, 2, 1, "AR slave 5 mod 3 = 2");
    put(CH_AW, 40'h4_0000 << 4, 0, 1, 1, "AW slave 4 mod 3 = 1");
    put(CH_W,  40'h0, 0, 1, 1, "W follows AW");
    put(CH_W,  40'h0, 0, 1, 1, "W follows AW again");
    put(CH_R,  40'h0, 1, S + 1, 0, "R to master 1");
    put(CH_B,  40'h0, 0, S + 0, 0, "B to master 0");
    @(posedge clk); #1;
    chk(drop_count == 0, "no drops");
    out_ready = 0;
    for (int k = 0; k < 5; k++) begin
      rx = '0; rx.chan = CH_R; rx_valid = 1; @(posedge clk); #1;
    end
    rx_valid = 0; @(posedge clk); #1;
    chk(drop_count == 5, $sformatf("5 dropped, counted %0d", drop_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
