// tb_stream: the four STREAM kernels run through the bridge on remote memory.
//
// Two bus masters of a compute node stand in for processor cores.  Three
// arrays a, b, c of N 64-bit elements live in the memory node (behind bridge
// B); each master maps the same remote window through its own transceiver
// (master m -> link m).  The kernels use integer arithmetic with q = 3 in
// place of floating point:
//   copy  c = a        scale b = q*c        add  c = a + b     triad a = b + q*c
// Each master works on its half of the elements in 4-beat bursts (8
// elements per burst), reading the source arrays and writing the result.
// After every kernel all three arrays are read back through the bridge and
// compared with a reference computed here.  Every kernel runs with one master
// and with two, and the number of bytes moved per compute-node bus cycle is
// printed.  A final copy runs with both links limited to 1/64 flit per
// transceiver cycle: each link must stay within the limit and be busy at
// least 80% of it, i.e. the link, not the masters, sets the pace, as with
// several cores in the published measurements.
// N is far below the 10 million elements of the published runs so that the
// simulation stays short; the access pattern is the same.
module tb_stream;
  import bridge_pkg::*;
  localparam int M = 2, S = 2, T = 2;
  localparam int N = 128;                 // elements per array
  localparam logic [ADDR_W-1:0] WIN = 40'h10_0000_0000;
  localparam logic [ADDR_W-1:0] A_OFF = 40'h0000, B_OFF = 40'h1000, C_OFF = 40'h2000;

  logic clk_a = 0, clk_b = 0, xclk = 0, rst_n = 1;
  initial #1 rst_n = 0;
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


  // -------------------------------------------------------------- helpers
  task automatic wcfg(input int unit, input int idx, input cfg_field_e f, input logic [ADDR_W-1:0] d);
    @(posedge clk_a); #1;
    cfg_a.we = 1; cfg_a.unit = 8'(unit); cfg_a.idx = 8'(idx); cfg_a.field = f; cfg_a.wdata = d;
    @(posedge clk_a); #1 cfg_a.we = 0;
  endtask

  task automatic wr4(input int m, input logic [ADDR_W-1:0] a, input logic [63:0] e [8]);
    @(posedge clk_a); #1;
    a_aw[m].id = 6'(m); a_aw[m].addr = a; a_aw[m].len = 3; a_aw_valid[m] = 1;
    do @(posedge clk_a); while (!a_aw_ready[m]);
    #1 a_aw_valid[m] = 0;
    for (int k = 0; k < 4; k++) begin
      a_w[m].data = {e[2*k+1], e[2*k]}; a_w[m].strb = '1; a_w[m].last = k == 3; a_w_valid[m] = 1;
      do @(posedge clk_a); while (!a_w_ready[m]);
      #1 a_w_valid[m] = 0;
    end
    while (!a_b_valid[m]) begin @(posedge clk_a); #1; end
    a_b_ready[m] = 1;
    @(posedge clk_a); #1 a_b_ready[m] = 0;
  endtask

  task automatic rd4(input int m, input logic [ADDR_W-1:0] a, output logic [63:0] e [8]);
    @(posedge clk_a); #1;
    a_ar[m].id = 6'(m); a_ar[m].addr = a; a_ar[m].len = 3; a_ar_valid[m] = 1;
    do @(posedge clk_a); while (!a_ar_ready[m]);
    #1 a_ar_valid[m] = 0;
    for (int k = 0; k < 4; k++) begin
      while (!a_r_valid[m]) begin @(posedge clk_a); #1; end
      {e[2*k+1], e[2*k]} = a_r[m].data;
      a_r_ready[m] = 1;
      @(posedge clk_a); #1 a_r_ready[m] = 0;
    end
  endtask

  logic [63:0] ra [N], rb [N], rc [N];     // reference arrays
  longint bytes_moved;

  // one master runs one kernel over elements [lo, hi)
  task automatic kernel(input int m, input int kind, input int lo, input int hi);
    logic [63:0] x [8], y [8], z [8];
    for (int j = lo; j < hi; j += 8) begin
      logic [ADDR_W-1:0] o;
      o = 40'(j * 8);
      case (kind)
        0: begin rd4(m, WIN + A_OFF + o, x); wr4(m, WIN + C_OFF + o, x); bytes_moved += 128; end
        1: begin rd4(m, WIN + C_OFF + o, x);
                 for (int i = 0; i < 8; i++) z[i] = 3 * x[i];
                 wr4(m, WIN + B_OFF + o, z); bytes_moved += 128; end
        2: begin rd4(m, WIN + A_OFF + o, x); rd4(m, WIN + B_OFF + o, y);
                 for (int i = 0; i < 8; i++) z[i] = x[i] + y[i];
                 wr4(m, WIN + C_OFF + o, z); bytes_moved += 192; end
        default: begin rd4(m, WIN + B_OFF + o, x); rd4(m, WIN + C_OFF + o, y);
                 for (int i = 0; i < 8; i++) z[i] = x[i] + 3 * y[i];
                 wr4(m, WIN + A_OFF + o, z); bytes_moved += 192; end
      endcase
    end
  endtask

  task automatic ref_kernel(input int kind);
    for (int j = 0; j < N; j++)
      case (kind)
        0: rc[j] = ra[j];
        1: rb[j] = 3 * rc[j];
        2: rc[j] = ra[j] + rb[j];
        default: ra[j] = rb[j] + 3 * rc[j];
      endcase
  endtask

  task automatic verify(input string what);
    logic [63:0] x [8];
    int bad = 0;
    for (int j = 0; j < N; j += 8) begin
      rd4(0, WIN + A_OFF + 40'(j * 8), x); for (int i = 0; i < 8; i++) if (x[i] != ra[j+i]) bad++;
      rd4(1, WIN + B_OFF + 40'(j * 8), x); for (int i = 0; i < 8; i++) if (x[i] != rb[j+i]) bad++;
      rd4(0, WIN + C_OFF + 40'(j * 8), x); for (int i = 0; i < 8; i++) if (x[i] != rc[j+i]) bad++;
    end
    chk(bad == 0, $sformatf("%s: %0d wrong elements", what, bad));
  endtask

  string kname [4] = '{"copy", "scale", "add", "triad"};
  longint t0, t1;
  real bw [2][4];
  int xcycles, nflits [T], nthr [T];
  initial for (int t = 0; t < T; t++) begin nflits[t] = 0; nthr[t] = 0; end
  always @(posedge xclk) begin
    xcycles++;
    for (int t = 0; t < T; t++) begin
      if (a_tx_valid[t] && a_tx_ready[t]) nflits[t]++;
      if (a_thr[t]) nthr[t]++;
    end
  end

  initial begin
    xcycles = 0;
    repeat (5) @(posedge clk_a); #1 rst_n = 1;
    for (int m = 0; m < M; m++) begin
      wcfg(m, 0, F_LOW, WIN);
      wcfg(m, 0, F_HIGH, WIN + 40'hFFFF);
      wcfg(m, 0, F_OFFSET, 40'h0);
      wcfg(m, 0, F_PORT, ADDR_W'((1 << ROUTE_W) | m));
    end
    // initialise a = 1 + j, b = 2, c = 0 through the bridge
    begin
      logic [63:0] x [8];
      for (int j = 0; j < N; j += 8) begin
        for (int i = 0; i < 8; i++) x[i] = 64'(1 + j + i);
        wr4(0, WIN + A_OFF + 40'(j * 8), x);
        for (int i = 0; i < 8; i++) x[i] = 64'd2;
        wr4(1, WIN + B_OFF + 40'(j * 8), x);
        for (int i = 0; i < 8; i++) x[i] = 64'd0;
        wr4(0, WIN + C_OFF + 40'(j * 8), x);
      end
      for (int j = 0; j < N; j++) begin ra[j] = 64'(1 + j); rb[j] = 2; rc[j] = 0; end
    end
    verify("initialisation");

    for (int cores = 1; cores <= 2; cores++) begin
      for (int kind = 0; kind < 4; kind++) begin
        bytes_moved = 0;
        t0 = $time;
        if (cores == 1) kernel(0, kind, 0, N);
        else fork
          kernel(0, kind, 0, N / 2);
          kernel(1, kind, N / 2, N);
        join
        t1 = $time;
        ref_kernel(kind);
        bw[cores-1][kind] = real'(bytes_moved) / (real'(t1 - t0) / 10.0);
        $display("%s with %0d master(s): %0d bytes in %0d bus cycles = %.2f bytes/cycle",
                 kname[kind], cores, bytes_moved, (t1 - t0) / 10, bw[cores-1][kind]);
        verify($sformatf("%s, %0d master(s)", kname[kind], cores));
      end
    end
    for (int kind = 0; kind < 4; kind++)
      chk(bw[1][kind] > bw[0][kind], $sformatf("%s: two masters move more than one", kname[kind]));

    // link-bound run: both links at 1/64 flit per transceiver cycle
    wcfg(128, 0, F_LOW, ADDR_W'(RL_ONE / 64));
    wcfg(129, 0, F_LOW, ADDR_W'(RL_ONE / 64));
    repeat (10) @(posedge clk_a);
    begin
      int x0, f0 [T];
      x0 = xcycles;
      for (int t = 0; t < T; t++) f0[t] = nflits[t];
      bytes_moved = 0;
      fork
        kernel(0, 0, 0, N / 2);
        kernel(1, 0, N / 2, N);
      join
      ref_kernel(0);
      for (int t = 0; t < T; t++) begin
        int sent, cyc;
        sent = nflits[t] - f0[t];
        cyc  = xcycles - x0;
        $display("rate-limited copy, link %0d: %0d flits in %0d transceiver cycles (limit %0d), %0d cycles throttled",
                 t, sent, cyc, cyc / 64 + 1, nthr[t]);
        chk(sent <= cyc / 64 + 1, "link rate within the limit");
        chk(sent * 64 * 10 >= cyc * 8, "link busy at least 80% of its limit: the link sets the pace");
      end
      verify("rate-limited copy");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk_a);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
