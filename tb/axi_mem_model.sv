// axi_mem_model: behavioural AXI4 memory slave for testbenches (stands in for
// the DDR controller port of a memory node).  One write and one read are
// served at a time, in order.  Storage is WORDS words of DATA_W bits indexed
// by (addr / STRB_W) mod WORDS; every word starts as a function of its index.
// rst_n (synchronous) empties both channels; 'hold' forces all ready/valid outputs low, to back the bridge up.
module axi_mem_model
  import bridge_pkg::*;
#(
  parameter int unsigned WORDS = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic hold,
  input  sax_t aw,
  input  logic aw_valid,
  output logic aw_ready,
  input  w_t   w,
  input  logic w_valid,
  output logic w_ready,
  input  sax_t ar,
  input  logic ar_valid,
  output logic ar_ready,
  output sb_t  b,
  output logic b_valid,
  input  logic b_ready,
  output sr_t  r,
  output logic r_valid,
  input  logic r_ready,
  output int   writes,
  output int   reads
);
  logic [DATA_W-1:0] mem [WORDS];
  initial for (int i = 0; i < WORDS; i++) mem[i] = {4{32'hA5000000 | i}};

  function automatic int widx(logic [ADDR_W-1:0] a);
    return int'((a / STRB_W) % WORDS);
  endfunction

  // write channel
  typedef enum logic [1:0] {W_ADDR, W_DATA, W_RESP} wst_e;
  wst_e wst = W_ADDR;
  logic [ADDR_W-1:0] waddr;
  logic [SID_W-1:0]  wid;
  assign aw_ready = rst_n && !hold && wst == W_ADDR;
  assign w_ready  = rst_n && !hold && wst == W_DATA;
  assign b_valid  = rst_n && !hold && wst == W_RESP;
  assign b.id     = wid;
  assign b.resp   = 2'b00;
  initial writes = 0;
  always @(posedge clk) begin
    if (!rst_n) wst <= W_ADDR;
    else case (wst)
      W_ADDR: if (aw_valid && aw_ready) begin waddr <= aw.addr; wid <= aw.id; wst <= W_DATA; end
      W_DATA: if (w_valid && w_ready) begin
        for (int k = 0; k < STRB_W; k++)
          if (w.strb[k]) mem[widx(waddr)][8*k +: 8] <= w.data[8*k +: 8];
        waddr <= waddr + STRB_W;
        if (w.last) wst <= W_RESP;
      end
      default: if (b_valid && b_ready) begin wst <= W_ADDR; writes <= writes + 1; end
    endcase
  end

  // read channel
  logic              rbusy = 1'b0;
  logic [ADDR_W-1:0] raddr;
  logic [SID_W-1:0]  rid;
  logic [LEN_W-1:0]  rleft;
  assign ar_ready = rst_n && !hold && !rbusy;
  assign r_valid  = rst_n && !hold && rbusy;
  assign r.id     = rid;
  assign r.data   = mem[widx(raddr)];
  assign r.resp   = 2'b00;
  assign r.last   = rleft == 0;
  initial reads = 0;
  always @(posedge clk) begin
    if (!rst_n) rbusy <= 1'b0;
    else if (!rbusy) begin
      if (ar_valid && ar_ready) begin raddr <= ar.addr; rid <= ar.id; rleft <= ar.len; rbusy <= 1'b1; end
    end else if (r_valid && r_ready) begin
      raddr <= raddr + STRB_W;
      rleft <= rleft - 1;
      if (rleft == 0) begin rbusy <= 1'b0; reads <= reads + 1; end
    end
  end
endmodule
