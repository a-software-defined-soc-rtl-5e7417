// tb_edge_fifo: writes 300 flits in a 10 ns clock and reads them in a 6.4 ns
// clock, with random stalls on both sides, and checks order and contents
// against a queue kept by the testbench.  Also checks that the buffer reports
// full after exactly DEPTH writes with the reader stopped, and the three
// read-clock latency from write to visibility.
module tb_edge_fifo;
  import bridge_pkg::*;
  localparam int DEPTH = 8;
  logic wr_clk = 0, rd_clk = 0, wr_rst_n = 0, rd_rst_n = 0;
  always #5 wr_clk = ~wr_clk;
  always #3.2 rd_clk = ~rd_clk;
  int checks = 0, failures = 0;

  flit_t wr_data, rd_data; logic wr_valid, wr_ready, rd_valid, rd_ready;
  edge_fifo #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] expq[$];
  int nread = 0;
  bit  reader_on = 0;

  initial begin
    wr_data = '0; wr_valid = 0; rd_ready = 0;
    repeat (3) @(posedge wr_clk); #1 wr_rst_n = 1; rd_rst_n = 1;
    // fill with the reader stopped
    for (int k = 0; k < DEPTH; k++) begin
      chk(wr_ready, "room before full");
      wr_data = '0; wr_data.data = 128'(k); wr_valid = 1; expq.push_back(32'(k));
      @(posedge wr_clk); #1 wr_valid = 0;
    end
    chk(!wr_ready, "full after DEPTH writes");
    reader_on = 1;
    for (int k = DEPTH; k < 300; k++) begin
      wr_data.data = 128'(k); wr_valid = ($urandom % 4) != 0;
      @(posedge wr_clk);
      if (wr_valid && wr_ready) expq.push_back(32'(k)); else k--;
      #1 wr_valid = 0;
    end
  end

  always @(posedge rd_clk) begin
    rd_ready <= reader_on && ($urandom % 3) != 0;
    if (rd_valid && rd_ready) begin
      chk(expq.size() > 0 && rd_data.data == 128'(expq[0]), "order and data");
      void'(expq.pop_front());
      nread++;
    end
  end

  // latency from a write into an empty buffer to rd_valid
  initial begin
    wait (nread == 300);
    @(posedge wr_clk); #1;
    reader_on = 0;
    @(posedge rd_clk); @(posedge rd_clk); #0.5;
    wr_data.data = 128'd999; wr_valid = 1;
    @(posedge wr_clk); expq.push_back(32'd999); #0.5 wr_valid = 0;
    begin
      int n = 0;
      while (!rd_valid) begin @(posedge rd_clk); #0.1; n++; end
      chk(n >= 2 && n <= 4, $sformatf("crossing latency %0d read clocks", n));
      chk(rd_data.data == 128'd999, "last flit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge wr_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
