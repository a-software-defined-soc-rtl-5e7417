// mem_bridge: one end point of the software-defined memory bus bridge.
//
// An end point lets M local bus masters reach slaves on other chips and lets
// S local slaves serve masters on other chips, over T serial transceivers.
// The same RTL serves a compute node (masters in use), a memory node (slaves
// in use) or both at once.
//
// Transmit path (bus clock clk -> transceiver clock xclk):
//   master_streamer[m]  AXI4 AW/W/AR of master m -> request flits
//   memport[m]          region lookup, address rewrite, route = transceiver
//   slave_streamer[s]   B/R of slave s -> response flits, route = transceiver
//                       the request came in on
//   tx crossbar         (M+S) inputs -> T outputs, an edge buffer per pair,
//                       a round-robin packet arbiter per transceiver
//   rate_limiter[t]     software-set flit rate per transceiver
//   tx[t]               streaming user interface of transceiver t
// Receive path (xclk -> clk):
//   rx[t]               flits from transceiver t (no backpressure)
//   rx_steer[t]         requests -> slave by address, responses -> master
//   rx crossbar         T inputs -> S+M outputs (slaves first, then
//                       masters), edge buffers and packet arbiters
//   slave_streamer[s] / master_streamer[m]  back onto the AXI4 channels
//
// Configuration: cfg (in the bus clock) writes one memport entry field or one
// rate-limiter register per cycle; see bridge_pkg::cfg_t.  Rate-limiter
// registers are held in the bus clock and passed to xclk through two-flop
// synchronisers; they are quasi-static (software changes them while the link
// is idle or accepts one cycle of an intermediate value).
//
// Status: miss_count[m] counts requests of master m that hit no memport
// entry; drop_count[t] counts flits from transceiver t that found their edge
// buffer full; throttled[t] is high while the rate limiter holds a flit back.
//
// Latency through one end point, empty buffers, equal clocks: transmit 1
// (memport register) + 3 (edge buffer) cycles; receive 1 (rx_steer) + 3.
//
// The block structure follows the paper's figures (streamers per bus port,
// memport per master, crossbars with edge buffers and arbiters, rate
// limiters before the transceivers).  Widths, flit format, buffer depths,
// address decode of the local slaves and the response path are this design's.
module mem_bridge
  import bridge_pkg::*;
#(
  parameter int unsigned M             = 2,   // bus masters (prototype: 2)
  parameter int unsigned S             = 2,   // bus slaves (prototype: 2)
  parameter int unsigned T             = 2,   // transceivers (prototype: 2)
  parameter int unsigned ENTRIES       = 16,  // memport entries per master
  parameter int unsigned EDGE_DEPTH    = 16,  // flits per edge buffer
  parameter int unsigned SLAVE_SEL_LSB = 30   // local slave = addr[..:LSB] mod S
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        xclk,
  input  logic        xrst_n,
  input  cfg_t        cfg,
  // local bus masters
  input  ax_t         m_aw       [M],
  input  logic        m_aw_valid [M],
  output logic        m_aw_ready [M],
  input  w_t          m_w        [M],
  input  logic        m_w_valid  [M],
  output logic        m_w_ready  [M],
  input  ax_t         m_ar       [M],
  input  logic        m_ar_valid [M],
  output logic        m_ar_ready [M],
  output b_t          m_b        [M],
  output logic        m_b_valid  [M],
  input  logic        m_b_ready  [M],
  output r_t          m_r        [M],
  output logic        m_r_valid  [M],
  input  logic        m_r_ready  [M],
  // local bus slaves
  output sax_t        s_aw       [S],
  output logic        s_aw_valid [S],
  input  logic        s_aw_ready [S],
  output w_t          s_w        [S],
  output logic        s_w_valid  [S],
  input  logic        s_w_ready  [S],
  output sax_t        s_ar       [S],
  output logic        s_ar_valid [S],
  input  logic        s_ar_ready [S],
  input  sb_t         s_b        [S],
  input  logic        s_b_valid  [S],
  output logic        s_b_ready  [S],
  input  sr_t         s_r        [S],
  input  logic        s_r_valid  [S],
  output logic        s_r_ready  [S],
  // transceiver user interfaces (xclk)
  output flit_t       tx         [T],
  output logic        tx_valid   [T],
  input  logic        tx_ready   [T],
  input  flit_t       rx         [T],
  input  logic        rx_valid   [T],
  // status
  output logic [31:0] miss_count [M],
  output logic [31:0] drop_count [T],
  output logic        throttled  [T]
);

  localparam int unsigned NTX = M + S;   // tx crossbar inputs
  localparam int unsigned NRX = S + M;   // rx crossbar outputs

  // ---------------------------------------------------------------- transmit
  flit_t ms_tx [M];
  logic  ms_tx_valid [M], ms_tx_ready [M];
  flit_t txi [NTX];
  logic  txi_valid [NTX], txi_ready [NTX];
  flit_t rxo [NRX];
  logic  rxo_valid [NRX], rxo_ready [NRX];

  for (genvar m = 0; m < M; m++) begin : g_master
    master_streamer #(.SRC(SRC_W'(m))) u_streamer (
      .clk      (clk),
      .rst_n    (rst_n),
      .aw       (m_aw[m]),
      .aw_valid (m_aw_valid[m]),
      .aw_ready (m_aw_ready[m]),
      .w        (m_w[m]),
      .w_valid  (m_w_valid[m]),
      .w_ready  (m_w_ready[m]),
      .ar       (m_ar[m]),
      .ar_valid (m_ar_valid[m]),
      .ar_ready (m_ar_ready[m]),
      .b        (m_b[m]),
      .b_valid  (m_b_valid[m]),
      .b_ready  (m_b_ready[m]),
      .r        (m_r[m]),
      .r_valid  (m_r_valid[m]),
      .r_ready  (m_r_ready[m]),
      .tx       (ms_tx[m]),
      .tx_valid (ms_tx_valid[m]),
      .tx_ready (ms_tx_ready[m]),
      .rx       (rxo[S+m]),
      .rx_valid (rxo_valid[S+m]),
      .rx_ready (rxo_ready[S+m])
    );

    memport #(.ENTRIES(ENTRIES), .UNIT(CFG_UNIT_W'(m))) u_memport (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg        (cfg),
      .in         (ms_tx[m]),
      .in_valid   (ms_tx_valid[m]),
      .in_ready   (ms_tx_ready[m]),
      .out        (txi[m]),
      .out_valid  (txi_valid[m]),
      .out_ready  (txi_ready[m]),
      .miss_count (miss_count[m])
    );
  end

  for (genvar s = 0; s < S; s++) begin : g_slave
    slave_streamer u_streamer (
      .clk      (clk),
      .rst_n    (rst_n),
      .rx       (rxo[s]),
      .rx_valid (rxo_valid[s]),
      .rx_ready (rxo_ready[s]),
      .aw       (s_aw[s]),
      .aw_valid (s_aw_valid[s]),
      .aw_ready (s_aw_ready[s]),
      .w        (s_w[s]),
      .w_valid  (s_w_valid[s]),
      .w_ready  (s_w_ready[s]),
      .ar       (s_ar[s]),
      .ar_valid (s_ar_valid[s]),
      .ar_ready (s_ar_ready[s]),
      .b        (s_b[s]),
      .b_valid  (s_b_valid[s]),
      .b_ready  (s_b_ready[s]),
      .r        (s_r[s]),
      .r_valid  (s_r_valid[s]),
      .r_ready  (s_r_ready[s]),
      .tx       (txi[M+s]),
      .tx_valid (txi_valid[M+s]),
      .tx_ready (txi_ready[M+s])
    );
  end

  flit_t xo [T];
  logic  xo_valid [T], xo_ready [T];

  flit_switch #(.NI(NTX), .NO(T), .DEPTH(EDGE_DEPTH)) u_tx_xbar (
    .in_clk    (clk),
    .in_rst_n  (rst_n),
    .in        (txi),
    .in_valid  (txi_valid),
    .in_ready  (txi_ready),
    .out_clk   (xclk),
    .out_rst_n (xrst_n),
    .out       (xo),
    .out_valid (xo_valid),
    .out_ready (xo_ready)
  );

  // rate-limiter registers (bus clock) and their synchronisers (xclk)
  logic [RL_FRAC:0] rl_rate_q  [T], rl_rate_s1 [T], rl_rate_s2 [T];
  logic [7:0]       rl_burst_q [T], rl_burst_s1 [T], rl_burst_s2 [T];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < T; t++) begin
        rl_rate_q[t]  <= (RL_FRAC+1)'(RL_ONE);
        rl_burst_q[t] <= 8'd1;
      end
    end else if (cfg.we && cfg.unit >= CFG_RL_BASE && 32'(cfg.unit - CFG_RL_BASE) < T) begin
      for (int t = 0; t < T; t++) begin
        if (32'(cfg.unit - CFG_RL_BASE) == t) begin
          if (cfg.field == F_LOW)  rl_rate_q[t]  <= cfg.wdata[RL_FRAC:0];
          if (cfg.field == F_HIGH) rl_burst_q[t] <= cfg.wdata[7:0];
        end
      end
    end
  end

  always_ff @(posedge xclk or negedge xrst_n) begin
    if (!xrst_n) begin
      for (int t = 0; t < T; t++) begin
        rl_rate_s1[t]  <= (RL_FRAC+1)'(RL_ONE);
        rl_rate_s2[t]  <= (RL_FRAC+1)'(RL_ONE);
        rl_burst_s1[t] <= 8'd1;
        rl_burst_s2[t] <= 8'd1;
      end
    end else begin
      rl_rate_s1  <= rl_rate_q;
      rl_rate_s2  <= rl_rate_s1;
      rl_burst_s1 <= rl_burst_q;
      rl_burst_s2 <= rl_burst_s1;
    end
  end

  // ----------------------------------------------------------------- receive
  flit_t rs [T];
  logic  rs_valid [T], rs_ready [T];

  for (genvar t = 0; t < T; t++) begin : g_xcvr
    rate_limiter u_rl (
      .clk       (xclk),
      .rst_n     (xrst_n),
      .rate      (rl_rate_s2[t]),
      .burst     (rl_burst_s2[t]),
      .in        (xo[t]),
      .in_valid  (xo_valid[t]),
      .in_ready  (xo_ready[t]),
      .out       (tx[t]),
      .out_valid (tx_valid[t]),
      .out_ready (tx_ready[t]),
      .throttled (throttled[t])
    );

    rx_steer #(.IDX(ROUTE_W'(t)), .S(S), .SLAVE_SEL_LSB(SLAVE_SEL_LSB)) u_steer (
      .clk        (xclk),
      .rst_n      (xrst_n),
      .rx         (rx[t]),
      .rx_valid   (rx_valid[t]),
      .out        (rs[t]),
      .out_valid  (rs_valid[t]),
      .out_ready  (rs_ready[t]),
      .drop_count (drop_count[t])
    );
  end

  flit_switch #(.NI(T), .NO(NRX), .DEPTH(EDGE_DEPTH)) u_rx_xbar (
    .in_clk    (xclk),
    .in_rst_n  (xrst_n),
    .in        (rs),
    .in_valid  (rs_valid),
    .in_ready  (rs_ready),
    .out_clk   (clk),
    .out_rst_n (rst_n),
    .out       (rxo),
    .out_valid (rxo_valid),
    .out_ready (rxo_ready)
  );

endmodule
