// rate_limiter: software-controlled limit on the flit rate handed to one
// transceiver.
//
// A credit bucket: every clock it gains 'rate' credits (RL_ONE credits are
// one flit, so rate = RL_ONE means one flit per cycle, i.e. no limit, and
// rate = RL_ONE/4 one flit every four cycles).  A flit may pass in a cycle
// if the bucket plus that cycle's credits reach RL_ONE, and passing one
// costs RL_ONE; the remainder carries over, so fractional rates are exact
// over time.  Between flits the bucket keeps at most burst*RL_ONE - 1
// credits, so after an idle period 'burst' flits may leave back to back
// before the set rate takes over again.  While the bucket is short
// the limiter holds in_ready low, so the stall propagates back into the edge
// buffers (the link itself has no backpressure).
//
// Combinational data path, registered bucket.  rate and burst come from the
// configuration registers; their reset values (full rate, burst 1) make the
// limiter transparent.  The paper names the rate limiter and places it on the
// transmit side; the credit-bucket scheme is this design's choice.
module rate_limiter
  import bridge_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RL_FRAC:0]  rate,    // credits per cycle, RL_ONE = full rate
  input  logic [7:0]        burst,   // bucket size in flits (0 counts as 1)
  input  flit_t             in,
  input  logic              in_valid,
  output logic              in_ready,
  output flit_t             out,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              throttled   // a flit waits for credit this cycle
);

  localparam int unsigned CW = RL_FRAC + 9;   // holds 255 flits of credit

  logic [CW-1:0] credit_q, credit_add, cap;
  logic          allow;

  always_comb begin
    cap        = ((burst == 0) ? CW'(RL_ONE) : CW'(burst) << RL_FRAC) - 1'b1;
    credit_add = credit_q + CW'(rate);
    allow      = credit_add >= CW'(RL_ONE);
    out        = in;
    out_valid  = in_valid && allow;
    in_ready   = out_ready && allow;
    throttled  = in_valid && !allow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit_q <= '0;
    end else begin
      logic [CW-1:0] c;
      c = credit_add;
      if (out_valid && out_ready) c = c - CW'(RL_ONE);
      if (c > cap) c = cap;
      credit_q <= c;
    end
  end

endmodule
