// pkt_arbiter: fair round-robin arbiter between N flit queues that grants a
// whole packet at a time.
//
// When no packet is open, the first queue with a flit, searching from the one
// after the last granted queue, is connected to the output.  Once a flit
// without eop has been passed, the arbiter stays on that queue until the flit
// with eop is passed, even if the queue runs empty in between, so packets
// (a write address and its data) are never interleaved.  After each packet
// the round-robin pointer moves past the winner, so every queue gets its
// turn: with all N queues busy and single-flit packets, each gets 1/N of the
// output.
//
// Combinational from in_valid to out_valid and from out_ready to in_ready;
// the grant state is registered.  The paper asks for arbiters that fairly
// distribute the transceiver bandwidth; round robin over packets is this
// design's way of doing it.
module pkt_arbiter
  import bridge_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in       [N],
  input  logic  in_valid [N],
  output logic  in_ready [N],
  output flit_t out,
  output logic  out_valid,
  input  logic  out_ready
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] rr_q;       // first queue to look at
  logic          locked_q;   // a packet is open
  logic [IW-1:0] owner_q;    // queue that holds the open packet
  logic [IW-1:0] grant;
  logic          found;

  always_comb begin
    grant = owner_q;
    found = locked_q;
    if (!locked_q) begin
      for (int k = N - 1; k >= 0; k--) begin
        if (in_valid[(32'(rr_q) + 32'(k)) % N]) begin
          grant = IW'((32'(rr_q) + 32'(k)) % N);
          found = 1'b1;
        end
      end
    end
  end

  always_comb begin
    out       = in[grant];
    out_valid = found && in_valid[grant];
    for (int i = 0; i < N; i++) in_ready[i] = found && out_ready && (IW'(i) == grant);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q     <= '0;
      locked_q <= 1'b0;
      owner_q  <= '0;
    end else if (out_valid && out_ready) begin
      if (out.eop) begin
        locked_q <= 1'b0;
        rr_q     <= (32'(grant) == N - 1) ? '0 : grant + 1'b1;
      end else begin
        locked_q <= 1'b1;
        owner_q  <= grant;
      end
    end
  end

endmodule
