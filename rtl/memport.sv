// memport: request preparation and steering for one bus master.
//
// Holds a lookup structure of ENTRIES regions.  Each entry has a low and a
// high address (inclusive), a remote-memory offset and an output port (the
// transceiver the region lives behind), plus a valid bit.  Software writes the
// entries at run time through the configuration port (one register per
// write; see bridge_pkg::cfg_t), which the SoC maps into its own address
// space, so configuration travels in band on the memory bus.
//
// For every AW or AR flit the address is compared with all entries in
// parallel; the lowest-numbered entry that holds it wins.  The address is
// rewritten as  addr - low + offset  (the offset is the region's base address
// on the remote bus) and the flit's route is set to the entry's output port.
// W flits inherit the route of the AW that opened their packet.  A request
// that hits no entry is dropped together with its write data and counted in
// miss_count; software must map a region before using it.
//
// Timing: one register stage, valid/ready, full throughput (in_ready is
// high whenever the output register is empty or being emptied).
//
// The entry fields (Low Addr, High Addr, Rmem Offset, OutPort), their role as
// index / preparation / steering and the in-band configuration are the
// paper's; the entry count, the first-match priority, the exact offset
// arithmetic and the treatment of misses are choices of this design.
module memport
  import bridge_pkg::*;
#(
  parameter int unsigned       ENTRIES = 16,
  parameter logic [CFG_UNIT_W-1:0] UNIT = '0   // configuration unit number
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  flit_t       in,
  input  logic        in_valid,
  output logic        in_ready,
  output flit_t       out,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] miss_count
);

  typedef struct packed {
    logic               valid;
    logic [ADDR_W-1:0]  low;
    logic [ADDR_W-1:0]  high;
    logic [ADDR_W-1:0]  offset;
    logic [ROUTE_W-1:0] outport;
  } entry_t;

  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  entry_t        table_q [ENTRIES];
  logic [EW-1:0] widx;
  assign widx = cfg.idx[EW-1:0];

  // configuration writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) table_q[e] <= '0;
    end else if (cfg.we && cfg.unit == UNIT && 32'(cfg.idx) < ENTRIES) begin
      unique case (cfg.field)
        F_LOW:    table_q[widx].low    <= cfg.wdata;
        F_HIGH:   table_q[widx].high   <= cfg.wdata;
        F_OFFSET: table_q[widx].offset <= cfg.wdata;
        F_PORT: begin
          table_q[widx].outport <= cfg.wdata[ROUTE_W-1:0];
          table_q[widx].valid   <= cfg.wdata[ROUTE_W];
        end
      endcase
    end
  end

  // parallel lookup, lowest index wins
  logic               hit;
  logic [ADDR_W-1:0]  new_addr;
  logic [ROUTE_W-1:0] hit_port;
  always_comb begin
    hit      = 1'b0;
    new_addr = in.addr;
    hit_port = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (table_q[e].valid && in.addr >= table_q[e].low && in.addr <= table_q[e].high) begin
        hit      = 1'b1;
        new_addr = in.addr - table_q[e].low + table_q[e].offset;
        hit_port = table_q[e].outport;
      end
    end
  end

  logic               is_head;
  logic [ROUTE_W-1:0] pkt_port;   // route of the open write packet
  logic               pkt_drop;   // open write packet is being dropped
  logic               take;
  assign is_head  = in.chan == CH_AW || in.chan == CH_AR;
  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out        <= '0;
      pkt_port   <= '0;
      pkt_drop   <= 1'b0;
      miss_count <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (is_head) begin
          if (in.chan == CH_AW) begin
            pkt_port <= hit_port;
            pkt_drop <= !hit;
          end
          if (hit) begin
            out       <= in;
            out.addr  <= new_addr;
            out.route <= hit_port;
            out_valid <= 1'b1;
          end else begin
            miss_count <= miss_count + 1;
          end
        end else if (!pkt_drop) begin
          out       <= in;
          out.route <= pkt_port;
          out_valid <= 1'b1;
        end
      end
    end
  end

endmodule
