// Shared types and widths of the memory bus bridge.
//
// Every unit of the bridge moves "flits": one flit carries one transfer of one
// AXI4 channel (an AW or AR address, a W or R data beat, or a B response) plus
// a few forwarding bits piggy-backed on it.  A "packet" is the run of flits
// that switches must keep together: a write request is AW followed by all its
// W beats (eop set on the beat with WLAST); AR, R and B flits are packets of one.
//
// The forwarding bits are:
//   route : output index for the next crossbar (transceiver, slave or master)
//   src   : index of the bus master that issued the request (carried to the
//           remote side and back so the response finds its master)
//   xport : on the receiving side, the transceiver the request arrived on,
//           i.e. the one its response must go back on
//
// Bus widths are not given by the paper; 40-bit addresses fit the 448 GB master
// range of the prototype, 128-bit data is the width of the prototype SoC's
// programmable-logic ports.  Both are choices of this design.
package bridge_pkg;

  localparam int unsigned ADDR_W  = 40;
  localparam int unsigned DATA_W  = 128;
  localparam int unsigned STRB_W  = DATA_W / 8;
  localparam int unsigned ID_W    = 6;
  localparam int unsigned LEN_W   = 8;
  localparam int unsigned ROUTE_W = 8;   // up to 256 crossbar outputs
  localparam int unsigned SRC_W   = 8;   // up to 256 masters per end point
  // ID seen by a local slave: {xport, src, master id}
  localparam int unsigned SID_W   = ROUTE_W + SRC_W + ID_W;

  typedef enum logic [2:0] {
    CH_AW = 3'd0,
    CH_W  = 3'd1,
    CH_AR = 3'd2,
    CH_R  = 3'd3,
    CH_B  = 3'd4
  } chan_e;

  typedef struct packed {
    chan_e                chan;
    logic                 eop;    // end of packet (switches release here)
    logic                 last;   // AXI WLAST / RLAST
    logic [ROUTE_W-1:0]   route;
    logic [SRC_W-1:0]     src;
    logic [ROUTE_W-1:0]   xport;
    logic [ID_W-1:0]      id;
    logic [ADDR_W-1:0]    addr;
    logic [LEN_W-1:0]     len;
    logic [DATA_W-1:0]    data;
    logic [STRB_W-1:0]    strb;
    logic [1:0]           resp;
  } flit_t;


  // AXI4 channel payloads, master side (ID_W) and slave side (SID_W)
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;
  } ax_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [STRB_W-1:0] strb;
    logic              last;
  } w_t;

  typedef struct packed {
    logic [ID_W-1:0] id;
    logic [1:0]      resp;
  } b_t;

  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [DATA_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } r_t;

  typedef struct packed {
    logic [SID_W-1:0]  id;
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;
  } sax_t;

  typedef struct packed {
    logic [SID_W-1:0] id;
    logic [1:0]       resp;
  } sb_t;

  typedef struct packed {
    logic [SID_W-1:0]  id;
    logic [DATA_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } sr_t;

  // In-band configuration write, one register per write.
  //   unit  < 128 : memport of master 'unit'; idx = entry; field selects
  //                 0 low address, 1 high address, 2 remote offset,
  //                 3 {valid, outport} (valid in bit ROUTE_W, outport below)
  //   unit >= 128 : rate limiter of transceiver unit-128; field 0 = rate
  //                 (credits per cycle, RL_ONE = full rate), field 1 = burst
  localparam int unsigned CFG_UNIT_W = 8;
  localparam int unsigned CFG_IDX_W  = 8;
  localparam logic [CFG_UNIT_W-1:0] CFG_RL_BASE = 8'd128;

  typedef enum logic [1:0] {
    F_LOW    = 2'd0,
    F_HIGH   = 2'd1,
    F_OFFSET = 2'd2,
    F_PORT   = 2'd3
  } cfg_field_e;

  typedef struct packed {
    logic                  we;
    logic [CFG_UNIT_W-1:0] unit;
    logic [CFG_IDX_W-1:0]  idx;
    cfg_field_e            field;
    logic [ADDR_W-1:0]     wdata;
  } cfg_t;

  // Rate limiter credit scale: one flit costs RL_ONE credits.
  localparam int unsigned RL_FRAC = 8;
  localparam int unsigned RL_ONE  = 1 << RL_FRAC;

endpackage
