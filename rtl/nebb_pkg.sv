// nebb_pkg: types, constants and routing functions shared by the NEBB
// (Non-Empty Buffer Bypass) lookahead bypass router and the network built
// from it.
//
// A router has 8 ports: 4 transit ports (X+, X-, Y+, Y-) and 4 local
// injection/ejection ports (concentration 4), as in the evaluated
// configuration. A flit carries a 128-bit payload (the channel width) plus
// a control sideband: head/tail marks, the packet length in flits (1 or 5
// in the evaluated traffic), the VC it occupies at the receiving router,
// the output port it takes at the receiving router (lookahead routing) and
// the destination. A lookahead (LA) carries the same control fields without
// the payload and reaches the next router one cycle before its flit.
//
// The sideband layout and the field widths are this design's own choice.
// Routing is dimension-order (X first, then Y); in a torus each dimension
// takes the shorter way round, ties going the positive way.
package nebb_pkg;

  localparam int unsigned NUM_PORTS  = 8;   // 4 transit + 4 local
  localparam int unsigned NUM_TRANS  = 4;
  localparam int unsigned PORT_W     = 3;
  localparam int unsigned COORD_W    = 4;   // radix up to 16 per dimension
  localparam int unsigned LOCAL_W    = 2;   // concentration up to 4
  localparam int unsigned VC_W       = 2;   // up to 4 VCs
  localparam int unsigned SIZE_W     = 3;   // packets up to 7 flits
  localparam int unsigned DATA_W     = 128; // channel width

  // Port numbering
  localparam logic [PORT_W-1:0] P_XP = 3'd0;
  localparam logic [PORT_W-1:0] P_XM = 3'd1;
  localparam logic [PORT_W-1:0] P_YP = 3'd2;
  localparam logic [PORT_W-1:0] P_YM = 3'd3;
  localparam logic [PORT_W-1:0] P_L0 = 3'd4;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [LOCAL_W-1:0] l;
  } dest_t;

  // Control fields common to flits and lookaheads
  typedef struct packed {
    logic              head;
    logic              tail;
    logic [SIZE_W-1:0] size;   // packet length in flits
    logic [VC_W-1:0]   vc;     // VC at the receiving router
    logic [PORT_W-1:0] route;  // output port at the receiving router
    dest_t             dest;
  } ctrl_t;

  typedef struct packed {
    ctrl_t             c;
    logic [DATA_W-1:0] data;
  } flit_t;

  typedef ctrl_t la_t;

  // Credit returned upstream: one per flit leaving an input port
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  // Per-cycle event pulses of a router, one bit per input port, for
  // performance counters and for tests
  typedef struct packed {
    logic [NUM_PORTS-1:0] la_in;          // lookahead received
    logic [NUM_PORTS-1:0] la_lost;        // bypass allowed but lost the LA arbiter
    logic [NUM_PORTS-1:0] bypass;         // flit granted the bypass
    logic [NUM_PORTS-1:0] bypass_nonempty;// ... while its VC buffer held flits
    logic [NUM_PORTS-1:0] bypass_vct;     // ... as a VCT multi-flit packet
    logic [NUM_PORTS-1:0] buf_write;      // flit written into the buffer
    logic [NUM_PORTS-1:0] sa_win;         // buffered flit won the switch
    logic [NUM_PORTS-1:0] fbfc_resv;      // whole-packet reservation for FBFC
  } rtr_events_t;

  function automatic logic is_transit(input logic [PORT_W-1:0] p);
    return int'(p) < int'(NUM_TRANS);
  endfunction

  // X ports are 0,1; Y ports are 2,3
  function automatic logic is_x_port(input logic [PORT_W-1:0] p);
    return p == P_XP || p == P_XM;
  endfunction

  // Dimension-order route at router (cx, cy) of a k x k mesh or torus.
  function automatic logic [PORT_W-1:0] dor_route(
      input logic [COORD_W-1:0] cx,
      input logic [COORD_W-1:0] cy,
      input dest_t              d,
      input logic               torus,
      input int unsigned        k);
    logic [COORD_W:0] dx, dy;
    if (d.x != cx) begin
      if (torus) begin
        dx = (COORD_W+1)'((int'(d.x) - int'(cx) + int'(k)) % int'(k));
        return (dx <= (COORD_W+1)'(k / 2)) ? P_XP : P_XM;
      end
      return (d.x > cx) ? P_XP : P_XM;
    end
    if (d.y != cy) begin
      if (torus) begin
        dy = (COORD_W+1)'((int'(d.y) - int'(cy) + int'(k)) % int'(k));
        return (dy <= (COORD_W+1)'(k / 2)) ? P_YP : P_YM;
      end
      return (d.y > cy) ? P_YP : P_YM;
    end
    return P_L0 + PORT_W'(d.l);
  endfunction

  // Coordinates of the neighbour reached through transit port p.
  function automatic logic [2*COORD_W-1:0] neighbour(
      input logic [COORD_W-1:0] cx,
      input logic [COORD_W-1:0] cy,
      input logic [PORT_W-1:0]  p,
      input int unsigned        k);
    logic [COORD_W-1:0] nx, ny;
    nx = cx;
    ny = cy;
    case (p)
      P_XP: nx = (int'(cx) == int'(k) - 1) ? '0 : cx + 1'b1;
      P_XM: nx = (cx == '0) ? COORD_W'(k - 1) : cx - 1'b1;
      P_YP: ny = (int'(cy) == int'(k) - 1) ? '0 : cy + 1'b1;
      P_YM: ny = (cy == '0) ? COORD_W'(k - 1) : cy - 1'b1;
      default: ;
    endcase
    return {nx, ny};
  endfunction

endpackage
