// edge_fifo: an edge buffer.  A first-in first-out queue of flits whose write
// side runs in one clock domain and whose read side runs in another, so that
// the transceiver pipelines can pull flits at their own clock.
//
// Classic asynchronous FIFO: binary write and read pointers one bit wider
// than the address, each converted to Gray code and passed to the other
// domain through a two-flop synchroniser.  Full is detected in the write
// domain, empty in the read domain; both are conservative, so no flit is
// lost or read twice.  The storage is a plain array (DEPTH words of one
// flit), written in the write domain and read combinationally at the read
// pointer (first-word fall-through).
//
// Interface: wr_valid/wr_ready and rd_valid/rd_ready handshakes.  A written
// flit becomes visible on the read side three read-clock edges later.
// The paper names the edge buffers and places the transceiver clock on their
// read side; depth and structure are this design's.
module edge_fifo
  import bridge_pkg::*;
#(
  parameter int unsigned DEPTH = 16   // power of two, at least 4
) (
  input  logic  wr_clk,
  input  logic  wr_rst_n,
  input  flit_t wr_data,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  logic  rd_clk,
  input  logic  rd_rst_n,
  output flit_t rd_data,
  output logic  rd_valid,
  input  logic  rd_ready
);

  localparam int unsigned AW = $clog2(DEPTH);

  flit_t mem [DEPTH];

  logic [AW:0] wptr, rptr;           // binary
  logic [AW:0] wgray, rgray;         // gray, registered in own domain
  logic [AW:0] rgray_s1, rgray_s2;   // read pointer seen by the write side
  logic [AW:0] wgray_s1, wgray_s2;   // write pointer seen by the read side

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign wr_ready = wgray != {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]};

  always_ff @(posedge wr_clk) begin
    if (wr_valid && wr_ready) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (wr_valid && wr_ready) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  // read domain
  assign rd_valid = rgray != wgray_s2;
  assign rd_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (rd_valid && rd_ready) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end

endmodule
