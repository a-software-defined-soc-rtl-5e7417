// master_streamer: time-multiplexes the AXI4 channels of one bus master into a
// single flit stream, and returns response flits to the master's R and B
// channels.
//
// Request side: an arbiter alternates (round robin) between the write address
// channel and the read address channel.  A granted write is sent as one
// packet: the AW flit, then every W beat up to WLAST, so switches downstream
// never interleave write data of different bursts.  A read is one AR flit.
// Each request flit carries the master's index SRC, so the remote side can
// address the response back.  The module is combinational on this side
// (valid/ready pass through); the next stage, the memport, registers.
//
// Response side: an R or B flit is offered to the matching channel; the flit
// is accepted when that channel accepts.
//
// The paper states only that the master channels are multiplexed in time;
// the packet format and the write-then-data ordering are this design's.
module master_streamer
  import bridge_pkg::*;
#(
  parameter logic [SRC_W-1:0] SRC = '0
) (
  input  logic  clk,
  input  logic  rst_n,
  // AXI4 master (this module is the slave of these channels)
  input  ax_t   aw,
  input  logic  aw_valid,
  output logic  aw_ready,
  input  w_t    w,
  input  logic  w_valid,
  output logic  w_ready,
  input  ax_t   ar,
  input  logic  ar_valid,
  output logic  ar_ready,
  output b_t    b,
  output logic  b_valid,
  input  logic  b_ready,
  output r_t    r,
  output logic  r_valid,
  input  logic  r_ready,
  // flits towards the memport
  output flit_t tx,
  output logic  tx_valid,
  input  logic  tx_ready,
  // response flits from the receive crossbar
  input  flit_t rx,
  input  logic  rx_valid,
  output logic  rx_ready
);

  typedef enum logic {S_IDLE, S_WDATA} state_e;
  state_e state;
  logic   prefer_read;   // round-robin pointer between write and read
  logic   pick_write;

  always_comb begin
    pick_write = aw_valid && (!ar_valid || !prefer_read);
  end

  always_comb begin
    tx        = '0;
    tx.src    = SRC;
    tx_valid  = 1'b0;
    if (state == S_WDATA) begin
      tx.chan  = CH_W;
      tx.data  = w.data;
      tx.strb  = w.strb;
      tx.last  = w.last;
      tx.eop   = w.last;
      tx_valid = w_valid;
    end else if (pick_write) begin
      tx.chan  = CH_AW;
      tx.id    = aw.id;
      tx.addr  = aw.addr;
      tx.len   = aw.len;
      tx.eop   = 1'b0;
      tx_valid = 1'b1;
    end else if (ar_valid) begin
      tx.chan  = CH_AR;
      tx.id    = ar.id;
      tx.addr  = ar.addr;
      tx.len   = ar.len;
      tx.eop   = 1'b1;
      tx.last  = 1'b1;
      tx_valid = 1'b1;
    end
  end

  always_comb begin
    w_ready  = state == S_WDATA && tx_ready;
    aw_ready = state == S_IDLE && pick_write && tx_ready;
    ar_ready = state == S_IDLE && !pick_write && ar_valid && tx_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      prefer_read <= 1'b0;
    end else begin
      if (aw_valid && aw_ready) begin
        state       <= S_WDATA;
        prefer_read <= 1'b1;
      end else if (ar_valid && ar_ready) begin
        prefer_read <= 1'b0;
      end
      if (state == S_WDATA && w_valid && w_ready && w.last)
        state <= S_IDLE;
    end
  end

  // responses
  always_comb begin
    b.id    = rx.id;
    b.resp  = rx.resp;
    r.id    = rx.id;
    r.data  = rx.data;
    r.resp  = rx.resp;
    r.last  = rx.last;
    b_valid = rx_valid && rx.chan == CH_B;
    r_valid = rx_valid && rx.chan == CH_R;
    rx_ready = (rx.chan == CH_B) ? b_ready :
               (rx.chan == CH_R) ? r_ready : 1'b1;  // anything else is discarded
  end

  // AXI: a transfer offered must stay stable until taken
  property p_tx_stable;
    @(posedge clk) disable iff (!rst_n) tx_valid && !tx_ready |=> tx_valid;
  endproperty
  a_tx_stable: assert property (p_tx_stable);

endmodule
