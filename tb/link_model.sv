// link_model: behavioural stand-in for a serial transceiver pair and the
// cable between them.  A flit accepted on the transmit side appears on the
// receive side LATENCY cycles of clk later.  Like the real link it never
// pushes back: tx_ready is always high.
module link_model
  import bridge_pkg::*;
#(
  parameter int unsigned LATENCY = 20
) (
  input  logic  clk,
  input  flit_t tx,
  input  logic  tx_valid,
  output logic  tx_ready,
  output flit_t rx,
  output logic  rx_valid
);
  flit_t pipe_d [LATENCY];
  logic  pipe_v [LATENCY];
  initial for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  assign tx_ready = 1'b1;
  assign rx       = pipe_d[LATENCY-1];
  assign rx_valid = pipe_v[LATENCY-1];
  always @(posedge clk) begin
    pipe_d[0] <= tx;
    pipe_v[0] <= tx_valid;
    for (int i = 1; i < LATENCY; i++) begin
      pipe_d[i] <= pipe_d[i-1];
      pipe_v[i] <= pipe_v[i-1];
    end
  end
endmodule
