// slave_streamer: the destination end of the bridge for one local bus slave.
//
// Receive side: request flits leave as AXI4 transfers: an AW flit on AW, the
// W flits that follow it on W, an AR flit on AR.  The slave sees a widened
// ID, {xport, src, id}: the transceiver the request came in on, the remote
// master index and the master's own ID.  The slave echoes the ID, so the
// response carries everything needed to return it; no table is kept here.
// The slave must accept AW without waiting for W (W flits queue behind the
// AW flit in the same stream).
//
// Transmit side: B and R transfers become flits; route is set to the xport
// taken from the ID so the transmit crossbar sends the response back on the
// transceiver the request used.  Every response flit is a packet of one; R
// keeps RLAST in the 'last' field.  B and R alternate round robin.
//
// The paper says flits are "appropriately demultiplexed at destination"; the
// ID widening and the return routing are this design's choices.
module slave_streamer
  import bridge_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // request flits from the receive crossbar
  input  flit_t rx,
  input  logic  rx_valid,
  output logic  rx_ready,
  // AXI4 slave (this module is the master of these channels)
  output sax_t  aw,
  output logic  aw_valid,
  input  logic  aw_ready,
  output w_t    w,
  output logic  w_valid,
  input  logic  w_ready,
  output sax_t  ar,
  output logic  ar_valid,
  input  logic  ar_ready,
  input  sb_t   b,
  input  logic  b_valid,
  output logic  b_ready,
  input  sr_t   r,
  input  logic  r_valid,
  output logic  r_ready,
  // response flits towards the transmit crossbar
  output flit_t tx,
  output logic  tx_valid,
  input  logic  tx_ready
);

  always_comb begin
    aw.id   = {rx.xport, rx.src, rx.id};
    aw.addr = rx.addr;
    aw.len  = rx.len;
    ar      = aw;
    w.data  = rx.data;
    w.strb  = rx.strb;
    w.last  = rx.last;
    aw_valid = rx_valid && rx.chan == CH_AW;
    w_valid  = rx_valid && rx.chan == CH_W;
    ar_valid = rx_valid && rx.chan == CH_AR;
    unique case (rx.chan)
      CH_AW:   rx_ready = aw_ready;
      CH_W:    rx_ready = w_ready;
      CH_AR:   rx_ready = ar_ready;
      default: rx_ready = 1'b1;    // not a request: discarded
    endcase
  end

  logic prefer_r;
  logic pick_b;
  assign pick_b = b_valid && (!r_valid || !prefer_r);

  always_comb begin
    tx       = '0;
    tx.eop   = 1'b1;
    tx_valid = b_valid || r_valid;
    if (pick_b) begin
      tx.chan  = CH_B;
      {tx.route, tx.src, tx.id} = b.id;
      tx.resp  = b.resp;
      tx.last  = 1'b1;
    end else begin
      tx.chan  = CH_R;
      {tx.route, tx.src, tx.id} = r.id;
      tx.resp  = r.resp;
      tx.data  = r.data;
      tx.last  = r.last;
    end
  end

  always_comb begin
    b_ready = pick_b && tx_ready;
    r_ready = !pick_b && tx_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      prefer_r <= 1'b0;
    else if (b_valid && b_ready)     prefer_r <= 1'b1;
    else if (r_valid && r_ready)     prefer_r <= 1'b0;
  end

endmodule
