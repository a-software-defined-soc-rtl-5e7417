// tb_mem_bridge: end-to-end test of two bridge end points.
//
// Both end points use every parameter at its default.  A compute node
// (bridge A, masters in use) and a memory node (bridge B, two memory slaves,
// tb/axi_mem_model.sv) are joined by two transceiver links (link_model, 20 cycles
// each way).  The bus clocks of the two nodes and the transceiver clock all
// differ.  Software configuration is done through A's configuration port:
//   master 0, entry 0: 0x10_0000_0000..+0xFFFF -> remote 0x0000_0000, link 0
//   master 0, entry 1: 0x10_0010_0000..+0xFFFF -> remote 0x4000_0000, link 1
//   master 1, entry 0: 0x20_0000_0000..+0xFFFF -> remote 0x4000_8000, link 0
// (bit 30 of the remote address selects the memory node's slave).
//
// Phases:
//  1. one idle read round trip (latency measured, must be under the
//     prototype's 134-cycle bridge round trip)
//  2. both masters write 4-beat bursts and read them back, concurrently,
//     sharing link 0 (arbitration) and using link 1
//  3. reads of never-written words, checked against the memory model's
//     initial pattern at the remote address the testbench computes itself
//  4. run-time reconfiguration of master 0 entry 1, then a read through it
//  5. a request to an unmapped address (memport miss)
//  6. link 0 rate-limited to 1/8 with 32-beat bursts: traffic still correct,
//     the limiter throttles and the edge buffers fill (backpressure to the
//     master)
//  7. the memory node's slaves stop while writes stream in: with no link
//     backpressure its receive edge buffers overflow and flits are dropped
// Each mechanism is counted and must have happened at least once.
module tb_mem_bridge;
  import bridge_pkg::*;
  localparam int M = 2, S = 2, T = 2;

  logic clk_a = 0, clk_b = 0, xclk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous resets at once
  always #5   clk_a = ~clk_a;
  always #4   clk_b = ~clk_b;
  always #3.2 xclk  = ~xclk;
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- node A
  cfg_t  cfg_a, cfg_b;
  ax_t   a_aw [M], a_ar [M]; w_t a_w [M]; b_t a_b [M]; r_t a_r [M];
  logic  a_aw_valid [M], a_aw_ready [M], a_w_valid [M], a_w_ready [M];
  logic  a_ar_valid [M], a_ar_ready [M], a_b_valid [M], a_b_ready [M], a_r_valid [M], a_r_ready [M];
  sax_t  as_aw [S], as_ar [S]; w_t as_w [S]; sb_t as_b [S]; sr_t as_r [S];
  logic  as_aw_valid [S], as_aw_ready [S], as_w_valid [S], as_w_ready [S], as_ar_valid [S], as_ar_ready [S];
  logic  as_b_valid [S], as_b_ready [S], as_r_valid [S], as_r_ready [S];
  flit_t a_tx [T], a_rx [T]; logic a_tx_valid [T], a_tx_ready [T], a_rx_valid [T];
  logic [31:0] a_miss [M], a_drop [T]; logic a_thr [T];

  mem_bridge dut_a (
    .clk(clk_a), .rst_n(rst_n), .xclk(xclk), .xrst_n(rst_n), .cfg(cfg_a),
    .m_aw(a_aw), .m_aw_valid(a_aw_valid), .m_aw_ready(a_aw_ready),
    .m_w(a_w), .m_w_valid(a_w_valid), .m_w_ready(a_w_ready),
    .m_ar(a_ar), .m_ar_valid(a_ar_valid), .m_ar_ready(a_ar_ready),
    .m_b(a_b), .m_b_valid(a_b_valid), .m_b_ready(a_b_ready),
    .m_r(a_r), .m_r_valid(a_r_valid), .m_r_ready(a_r_ready),
    .s_aw(as_aw), .s_aw_valid(as_aw_valid), .s_aw_ready(as_aw_ready),
    .s_w(as_w), .s_w_valid(as_w_valid), .s_w_ready(as_w_ready),
    .s_ar(as_ar), .s_ar_valid(as_ar_valid), .s_ar_ready(as_ar_ready),
    .s_b(as_b), .s_b_valid(as_b_valid), .s_b_ready(as_b_ready),
    .s_r(as_r), .s_r_valid(as_r_valid), .s_r_ready(as_r_ready),
    .tx(a_tx), .tx_valid(a_tx_valid), .tx_ready(a_tx_ready),
    .rx(a_rx), .rx_valid(a_rx_valid),
    .miss_count(a_miss), .drop_count(a_drop), .throttled(a_thr));

  // ---------------------------------------------------------------- node B
  ax_t   b_aw [M], b_ar [M]; w_t b_w [M]; b_t b_b [M]; r_t b_r [M];
  logic  b_aw_valid [M], b_aw_ready [M], b_w_valid [M], b_w_ready [M];
  logic  b_ar_valid [M], b_ar_ready [M], b_b_valid [M], b_b_ready [M], b_r_valid [M], b_r_ready [M];
  sax_t  bs_aw [S], bs_ar [S]; w_t bs_w [S]; sb_t bs_b [S]; sr_t bs_r [S];
  logic  bs_aw_valid [S], bs_aw_ready [S], bs_w_valid [S], bs_w_ready [S], bs_ar_valid [S], bs_ar_ready [S];
  logic  bs_b_valid [S], bs_b_ready [S], bs_r_valid [S], bs_r_ready [S];
  flit_t b_tx [T], b_rx [T]; logic b_tx_valid [T], b_tx_ready [T], b_rx_valid [T];
  logic [31:0] b_miss [M], b_drop [T]; logic b_thr [T];

  mem_bridge dut_b (
    .clk(clk_b), .rst_n(rst_n), .xclk(xclk), .xrst_n(rst_n), .cfg(cfg_b),
    .m_aw(b_aw), .m_aw_valid(b_aw_valid), .m_aw_ready(b_aw_ready),
    .m_w(b_w), .m_w_valid(b_w_valid), .m_w_ready(b_w_ready),
    .m_ar(b_ar), .m_ar_valid(b_ar_valid), .m_ar_ready(b_ar_ready),
    .m_b(b_b), .m_b_valid(b_b_valid), .m_b_ready(b_b_ready),
    .m_r(b_r), .m_r_valid(b_r_valid), .m_r_ready(b_r_ready),
    .s_aw(bs_aw), .s_aw_valid(bs_aw_valid), .s_aw_ready(bs_aw_ready),
    .s_w(bs_w), .s_w_valid(bs_w_valid), .s_w_ready(bs_w_ready),
    .s_ar(bs_ar), .s_ar_valid(bs_ar_valid), .s_ar_ready(bs_ar_ready),
    .s_b(bs_b), .s_b_valid(bs_b_valid), .s_b_ready(bs_b_ready),
    .s_r(bs_r), .s_r_valid(bs_r_valid), .s_r_ready(bs_r_ready),
    .tx(b_tx), .tx_valid(b_tx_valid), .tx_ready(b_tx_ready),
    .rx(b_rx), .rx_valid(b_rx_valid),
    .miss_count(b_miss), .drop_count(b_drop), .throttled(b_thr));

  // links
  for (genvar t = 0; t < T; t++) begin : g_link
    link_model #(.LATENCY(20)) u_ab (.clk(xclk), .tx(a_tx[t]), .tx_valid(a_tx_valid[t]),
      .tx_ready(a_tx_ready[t]), .rx(b_rx[t]), .rx_valid(b_rx_valid[t]));
    link_model #(.LATENCY(20)) u_ba (.clk(xclk), .tx(b_tx[t]), .tx_valid(b_tx_valid[t]),
      .tx_ready(b_tx_ready[t]), .rx(a_rx[t]), .rx_valid(a_rx_valid[t]));
  end

  // memory slaves of node B
  localparam int WORDS = 4096;
  logic hold = 0;
  int   mwrites [S], mreads [S];
  for (genvar s = 0; s < S; s++) begin : g_mem
    axi_mem_model #(.WORDS(WORDS)) u_mem (.clk(clk_b), .rst_n(rst_n), .hold(hold),
      .aw(bs_aw[s]), .aw_valid(bs_aw_valid[s]), .aw_ready(bs_aw_ready[s]),
      .w(bs_w[s]), .w_valid(bs_w_valid[s]), .w_ready(bs_w_ready[s]),
      .ar(bs_ar[s]), .ar_valid(bs_ar_valid[s]), .ar_ready(bs_ar_ready[s]),
      .b(bs_b[s]), .b_valid(bs_b_valid[s]), .b_ready(bs_b_ready[s]),
      .r(bs_r[s]), .r_valid(bs_r_valid[s]), .r_ready(bs_r_ready[s]),
      .writes(mwrites[s]), .reads(mreads[s]));
  end

  // unused sides: A's slaves idle, B's masters idle
  initial begin
    for (int s = 0; s < S; s++) begin
      as_aw_ready[s] = 1; as_w_ready[s] = 1; as_ar_ready[s] = 1;
      as_b[s] = '0; as_b_valid[s] = 0; as_r[s] = '0; as_r_valid[s] = 0;
    end
    for (int m = 0; m < M; m++) begin
      b_aw[m] = '0; b_aw_valid[m] = 0; b_w[m] = '0; b_w_valid[m] = 0; b_ar[m] = '0; b_ar_valid[m] = 0;
      b_b_ready[m] = 1; b_r_ready[m] = 1;
      a_aw[m] = '0; a_aw_valid[m] = 0; a_w[m] = '0; a_w_valid[m] = 0; a_ar[m] = '0; a_ar_valid[m] = 0;
      a_b_ready[m] = 0; a_r_ready[m] = 0;
    end
    cfg_a = '0; cfg_b = '0;
  end

  // -------------------------------------------------------- software model
  typedef struct { logic [ADDR_W-1:0] lo, hi, off; int port; } region_t;
  region_t map [M][$];

  task automatic wcfg(input int unit, input int idx, input cfg_field_e f, input logic [ADDR_W-1:0] d);
    @(posedge clk_a); #1;
    cfg_a.we = 1; cfg_a.unit = 8'(unit); cfg_a.idx = 8'(idx); cfg_a.field = f; cfg_a.wdata = d;
    @(posedge clk_a); #1 cfg_a.we = 0;
  endtask

  task automatic set_region(input int m, input int e, input logic [ADDR_W-1:0] lo, off, input int port);
    region_t r;
    r.lo = lo; r.hi = lo + 40'hFFFF; r.off = off; r.port = port;
    wcfg(m, e, F_LOW, r.lo);
    wcfg(m, e, F_HIGH, r.hi);
    wcfg(m, e, F_OFFSET, r.off);
    wcfg(m, e, F_PORT, ADDR_W'((1 << ROUTE_W) | port));
    while (map[m].size() <= e) map[m].push_back(r);
    map[m][e] = r;
  endtask

  // the remote address and its model word, computed without the bridge
  function automatic logic [ADDR_W-1:0] remote(input int m, input logic [ADDR_W-1:0] a);
    foreach (map[m][e]) if (a >= map[m][e].lo && a <= map[m][e].hi) return a - map[m][e].lo + map[m][e].off;
    return '1;
  endfunction
  function automatic logic [DATA_W-1:0] init_word(input logic [ADDR_W-1:0] ra);
    automatic int i = int'((ra / STRB_W) % WORDS);
    return {4{32'hA5000000 | i}};
  endfunction

  logic [DATA_W-1:0] ref_mem [M][logic [ADDR_W-1:0]];

  // ------------------------------------------------------- master drivers
  task automatic axi_write(input int m, input logic [ADDR_W-1:0] a, input int beats, input int seed);
    @(posedge clk_a); #1;
    a_aw[m].id = 6'(m); a_aw[m].addr = a; a_aw[m].len = 8'(beats - 1); a_aw_valid[m] = 1;
    do @(posedge clk_a); while (!a_aw_ready[m]);
    #1 a_aw_valid[m] = 0;
    for (int k = 0; k < beats; k++) begin
      a_w[m].data = {32'(seed), 32'(k), 32'(m), a[31:0]}; a_w[m].strb = '1; a_w[m].last = k == beats - 1;
      a_w_valid[m] = 1;
      do @(posedge clk_a); while (!a_w_ready[m]);
      ref_mem[m][a + 40'(16 * k)] = a_w[m].data;
      #1 a_w_valid[m] = 0;
    end
    while (!a_b_valid[m]) begin @(posedge clk_a); #1; end
    chk(a_b[m].id == 6'(m) && a_b[m].resp == 2'b00, "B response id");
    a_b_ready[m] = 1;
    @(posedge clk_a); #1 a_b_ready[m] = 0;
  endtask

  task automatic axi_read(input int m, input logic [ADDR_W-1:0] a, input int beats, output int cycles);
    int c;
    c = 0;
    @(posedge clk_a); #1;
    a_ar[m].id = 6'(m + 8); a_ar[m].addr = a; a_ar[m].len = 8'(beats - 1); a_ar_valid[m] = 1;
    do @(posedge clk_a); while (!a_ar_ready[m]);
    #1 a_ar_valid[m] = 0;
    for (int k = 0; k < beats; k++) begin
      logic [DATA_W-1:0] exp;
      while (!a_r_valid[m]) begin @(posedge clk_a); #1; c++; end
      if (k == 0) cycles = c;
      exp = ref_mem[m].exists(a + 40'(16 * k)) ? ref_mem[m][a + 40'(16 * k)] : init_word(remote(m, a + 40'(16 * k)));
      chk(a_r[m].data == exp && a_r[m].id == 6'(m + 8) && a_r[m].last == (k == beats - 1),
          $sformatf("m%0d read %h beat %0d: got %h exp %h", m, a, k, a_r[m].data, exp));
      a_r_ready[m] = 1;
      @(posedge clk_a); #1 a_r_ready[m] = 0;
    end
  endtask

  // ------------------------------------------------------- event counters
  int n_contend = 0, n_edge_full = 0, n_throttle = 0, n_link_use [T], n_rewrite = 0, n_reconf = 0;
  always @(posedge clk_a) begin
    if (dut_a.txi_valid[0] && !dut_a.txi_ready[0]) n_edge_full++;
  end
  always @(posedge xclk) begin
    if (dut_a.u_tx_xbar.g_out[0].u_arb.in_valid[0] && dut_a.u_tx_xbar.g_out[0].u_arb.in_valid[1]) n_contend++;
    if (a_thr[0]) n_throttle++;
    for (int t = 0; t < T; t++) if (a_tx_valid[t] && a_tx_ready[t]) n_link_use[t]++;
  end

  task automatic traffic(input int m, input int n, input int seed, input int beats = 4);
    int cyc;
    for (int k = 0; k < n; k++) begin
      logic [ADDR_W-1:0] a;
      a = map[m][k % map[m].size()].lo + 40'(($urandom % 256) * 64);
      axi_write(m, a, beats, seed + k);
      axi_read(m, a, beats, cyc);
    end
  endtask

  int lat;
  initial begin
    for (int t = 0; t < T; t++) n_link_use[t] = 0;
    repeat (5) @(posedge clk_a); #1 rst_n = 1;
    set_region(0, 0, 40'h10_0000_0000, 40'h0000_0000, 0);
    set_region(0, 1, 40'h10_0010_0000, 40'h4000_0000, 1);
    set_region(1, 0, 40'h20_0000_0000, 40'h4000_8000, 0);
    repeat (10) @(posedge clk_a);

    // 1. idle round trip
    axi_read(0, 40'h10_0000_0040, 1, lat);
    $display("idle read round trip: %0d compute-node bus cycles (links 20 xclk each way)", lat);
    chk(lat > 0 && lat < 134, "round trip within the prototype's 134 cycles");

    // 2. concurrent traffic from both masters
    fork
      traffic(0, 12, 100);
      traffic(1, 12, 200);
    join
    chk(mwrites[0] > 0 && mwrites[1] > 0, "both memory slaves written");

    // 3. offset rewrite seen through never-written words
    for (int k = 0; k < 3; k++) begin
      int cyc;
      axi_read(k == 2 ? 1 : 0, map[k == 2 ? 1 : 0][k == 2 ? 0 : k].lo + 40'hF000, 2, cyc);
      n_rewrite++;
    end

    // 4. run-time reconfiguration: entry 1 of master 0 moves to another remote base
    set_region(0, 1, 40'h10_0010_0000, 40'h4000_3000, 1);
    begin
      int cyc;
      axi_read(0, 40'h10_0010_0100, 1, cyc);
      n_reconf++;
    end

    // 5. memport miss
    begin
      int miss0;
      miss0 = int'(a_miss[0]);
      @(posedge clk_a); #1;
      a_ar[0].addr = 40'h30_0000_0000; a_ar[0].len = 0; a_ar_valid[0] = 1;
      do @(posedge clk_a); while (!a_ar_ready[0]);
      #1 a_ar_valid[0] = 0;
      repeat (5) @(posedge clk_a);
      chk(int'(a_miss[0]) == miss0 + 1, "unmapped request counted as a miss");
      repeat (200) @(posedge clk_a);
      chk(!a_r_valid[0], "no response to a dropped request");
    end

    // 6. rate limit link 0 to 1/8 of the transceiver clock
    wcfg(128 + 0, 0, F_LOW, ADDR_W'(RL_ONE / 8));
    fork
      traffic(0, 3, 300, 32);
      traffic(1, 3, 400, 32);
    join
    wcfg(128 + 0, 0, F_LOW, ADDR_W'(RL_ONE));

    // 7. overflow at the memory node: slaves stop, writes stream in
    hold = 1;
    fork
      for (int k = 0; k < 6; k++) begin
        @(posedge clk_a); #1;
        a_aw[0].addr = 40'h10_0000_0000; a_aw[0].len = 15; a_aw_valid[0] = 1;
        do @(posedge clk_a); while (!a_aw_ready[0]);
        #1 a_aw_valid[0] = 0;
        for (int b = 0; b < 16; b++) begin
          a_w[0].last = b == 15; a_w_valid[0] = 1;
          do @(posedge clk_a); while (!a_w_ready[0]);
          #1 a_w_valid[0] = 0;
        end
      end
    join_none
    repeat (2000) @(posedge clk_a);
    chk(b_drop[0] > 0, $sformatf("overflow at the memory node dropped %0d flits", b_drop[0]));

    $display("events: contention=%0d edge_full=%0d throttled=%0d link0=%0d link1=%0d rewrite=%0d reconfig=%0d miss=%0d drops=%0d",
             n_contend, n_edge_full, n_throttle, n_link_use[0], n_link_use[1], n_rewrite, n_reconf, a_miss[0], b_drop[0]);
    chk(n_contend > 0, "transceiver arbiter saw contention");
    chk(n_edge_full > 0, "edge buffer backpressure happened");
    chk(n_throttle > 0, "rate limiter throttled");
    chk(n_link_use[0] > 0 && n_link_use[1] > 0, "both transceivers used");
    chk(n_rewrite > 0 && n_reconf > 0, "rewrite and reconfiguration exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk_a);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
