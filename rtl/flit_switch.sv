// flit_switch: an electrical crossbar with its edge buffers and output
// arbiters, between two clock domains.
//
// Each of the NI inputs is steered by the route field of every flit to one of
// the NO outputs.  Behind every (output, input) pair sits its own edge buffer
// (edge_fifo), so a stalled output never blocks the other outputs of the same
// input, and a flit crosses from the input clock to the output clock inside
// that buffer.  Each output has a packet arbiter (pkt_arbiter) that takes
// whole packets from its NI buffers in round-robin order.
//
// Sources keep route constant within a packet, so a packet lands in one
// buffer and leaves it without interleaving.  A flit whose route is NO or
// above has no output and is discarded.  in_ready follows the target buffer,
// so the crossbar gives backpressure to whatever feeds it.
//
// The same module is used on the transmit side (masters and slave responses
// to transceivers) and on the receive side (transceivers to slaves and
// masters).  The crossbar/edge-buffer/arbiter arrangement follows the paper's
// block diagram; the buffer-per-pair organisation is this design's.
module flit_switch
  import bridge_pkg::*;
#(
  parameter int unsigned NI    = 4,
  parameter int unsigned NO    = 2,
  parameter int unsigned DEPTH = 16
) (
  input  logic  in_clk,
  input  logic  in_rst_n,
  input  flit_t in        [NI],
  input  logic  in_valid  [NI],
  output logic  in_ready  [NI],
  input  logic  out_clk,
  input  logic  out_rst_n,
  output flit_t out       [NO],
  output logic  out_valid [NO],
  input  logic  out_ready [NO]
);

  flit_t q_data  [NO][NI];
  logic  q_valid [NO][NI];
  logic  q_ready [NO][NI];
  logic  f_wv    [NO][NI];
  logic  f_wr    [NO][NI];

  // input demultiplexers
  always_comb begin
    for (int i = 0; i < NI; i++) begin
      in_ready[i] = 1'b1;                 // unroutable flits are discarded
      for (int o = 0; o < NO; o++) begin
        f_wv[o][i] = in_valid[i] && 32'(in[i].route) == o;
        if (32'(in[i].route) == o) in_ready[i] = f_wr[o][i];
      end
    end
  end

  for (genvar o = 0; o < NO; o++) begin : g_out
    for (genvar i = 0; i < NI; i++) begin : g_in
      edge_fifo #(.DEPTH(DEPTH)) u_buf (
        .wr_clk   (in_clk),
        .wr_rst_n (in_rst_n),
        .wr_data  (in[i]),
        .wr_valid (f_wv[o][i]),
        .wr_ready (f_wr[o][i]),
        .rd_clk   (out_clk),
        .rd_rst_n (out_rst_n),
        .rd_data  (q_data[o][i]),
        .rd_valid (q_valid[o][i]),
        .rd_ready (q_ready[o][i])
      );
    end

    pkt_arbiter #(.N(NI)) u_arb (
      .clk       (out_clk),
      .rst_n     (out_rst_n),
      .in        (q_data[o]),
      .in_valid  (q_valid[o]),
      .in_ready  (q_ready[o]),
      .out       (out[o]),
      .out_valid (out_valid[o]),
      .out_ready (out_ready[o])
    );
  end

endmodule
