// tb_master_streamer: drives a write burst and reads at the same time and
// checks the flit stream: AW first, then all W beats with eop on WLAST, AR
// flits between write packets only, src set, nothing lost or reordered
// within a channel.  Then offers R and B flits and checks the AXI outputs.
// The output is stalled at random to exercise the handshake.
module tb_master_streamer;
  import bridge_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ax_t aw, ar; w_t w; b_t b; r_t r;
  logic aw_valid, aw_ready, w_valid, w_ready, ar_valid, ar_ready;
  logic b_valid, b_ready, r_valid, r_ready;
  flit_t tx, rx; logic tx_valid, tx_ready, rx_valid, rx_ready;

  master_streamer #(.SRC(8'd5)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // sources
  initial begin
    aw = '0; aw_valid = 0; w = '0; w_valid = 0; ar = '0; ar_valid = 0;
    rx = '0; rx_valid = 0; b_ready = 1; r_ready = 1;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    fork
      begin   // two write bursts of 4 beats
        for (int n = 0; n < 2; n++) begin
          aw.id = 6'(n + 1); aw.addr = 40'h1000 * (n + 1); aw.len = 3; aw_valid = 1;
          do @(posedge clk); while (!aw_ready); #1 aw_valid = 0;
        end
      end
      begin
        for (int k = 0; k < 8; k++) begin
          w.data = 128'(k + 100); w.strb = '1; w.last = (k % 4) == 3; w_valid = 1;
          do @(posedge clk); while (!w_ready); #1 w_valid = 0;
        end
      end
      begin
        for (int n = 0; n < 3; n++) begin
          ar.id = 6'(n + 10); ar.addr = 40'h9000 + 40'(n); ar.len = 0; ar_valid = 1;
          do @(posedge clk); while (!ar_ready); #1 ar_valid = 0;
        end
      end
    join
  end

  // sink with random stalls and a reference check
  int nflits = 0, nw = 0, naw = 0, nar = 0;
  bit in_write = 0;
  always @(posedge clk) begin
    tx_ready <= ($urandom % 3) != 0;
    if (rst_n && tx_valid && tx_ready) begin
      nflits++;
      chk(tx.src == 8'd5, "src field");
      case (tx.chan)
        CH_AW: begin
          chk(!in_write && tx.addr == 40'h1000 * (naw + 1) && tx.id == 6'(naw + 1) && !tx.eop, "AW flit");
          naw++; in_write = 1;
        end
        CH_W: begin
          chk(in_write && tx.data == 128'(nw + 100) && tx.eop == ((nw % 4) == 3), "W flit order/eop");
          if (tx.eop) in_write = 0;
          nw++;
        end
        CH_AR: begin
          chk(!in_write && tx.addr == 40'h9000 + 40'(nar) && tx.eop, "AR flit not inside write packet");
          nar++;
        end
        default: chk(0, "unexpected channel");
      endcase
    end
  end

  initial begin
    wait (nflits == 13);
    repeat (3) @(posedge clk);
    chk(naw == 2 && nw == 8 && nar == 3, "all flits seen");
    // responses
    #1 rx = '0; rx.chan = CH_R; rx.id = 6'd7; rx.data = 128'hABCD; rx.last = 1; rx_valid = 1; r_ready = 0;
    #1 chk(r_valid && !b_valid && r.data == 128'hABCD && r.id == 7 && r.last && !rx_ready, "R offered, waits");
    r_ready = 1;
    #1 chk(rx_ready, "R taken when r_ready");
    rx.chan = CH_B; rx.id = 6'd9; rx.resp = 2'b10;
    #1 chk(b_valid && !r_valid && b.id == 9 && b.resp == 2'b10 && rx_ready, "B offered");
    rx_valid = 0;
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
