// rx_steer: receive-side steering for one transceiver.
//
// Flits arriving from the link are sorted into requests for the local slaves
// and responses for the local masters, and their route field is set for the
// receive crossbar, whose outputs 0..S-1 are the slave streamers and outputs
// S..S+M-1 the master streamers:
//   AW, AR  route = slave that owns the (already rewritten) address, chosen by
//           the address bits above SLAVE_SEL_LSB, modulo S
//   W       route of the AW that opened the packet
//   R, B    route = S + src, the master that issued the request
// Requests also get xport = IDX, the transceiver their response must return on.
//
// The link has no backpressure, so neither has this unit: it is one register
// stage, and if the crossbar cannot take the flit it is lost and drop_count
// is incremented.  Rate limiters on the sending side are meant to keep this
// from happening.
//
// The paper states that arriving flits are demultiplexed at destination and
// that the physical address identifies the slave port; the address-bit slave
// decode and the drop counter are this design's choices.
module rx_steer
  import bridge_pkg::*;
#(
  parameter logic [ROUTE_W-1:0] IDX           = '0,
  parameter int unsigned        S             = 2,
  parameter int unsigned        SLAVE_SEL_LSB = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  input  flit_t       rx,
  input  logic        rx_valid,
  output flit_t       out,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] drop_count
);

  logic [ROUTE_W-1:0] slave_sel, wr_route;
  flit_t              steered;

  always_comb begin
    slave_sel = ROUTE_W'((rx.addr >> SLAVE_SEL_LSB) % S);
    steered   = rx;
    unique case (rx.chan)
      CH_AW, CH_AR: begin
        steered.route = slave_sel;
        steered.xport = IDX;
      end
      CH_W: begin
        steered.route = wr_route;
        steered.xport = IDX;
      end
      default: steered.route = ROUTE_W'(S) + ROUTE_W'(rx.src);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out        <= '0;
      out_valid  <= 1'b0;
      wr_route   <= '0;
      drop_count <= '0;
    end else begin
      out_valid <= rx_valid;
      if (rx_valid) out <= steered;
      if (rx_valid && rx.chan == CH_AW) wr_route <= slave_sel;
      if (out_valid && !out_ready) drop_count <= drop_count + 1;
    end
  end

endmodule
