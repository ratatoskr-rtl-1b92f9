// noc_pkg -- types, constants and routing functions shared by the 3D mesh NoC.
//
// A router has seven ports, in the order local, east, west, north, south, up,
// down (the order used for the per-port usage statistics of the design).
// East is +x, north is +y and up is +z; this orientation is a choice of this
// implementation.
//
// A flit is a 2-bit type plus a FLIT_W-bit payload. A head flit carries the
// destination and source coordinates in its payload (head_t); body and tail
// flits carry whatever the sender puts there (the traffic generator stores the
// injection cycle there so that the receiver can measure latency). The flit
// width and the coordinate width are choices of this implementation; the flit
// width is a configuration parameter of the design without a fixed value.
//
// The package also holds the routing functions. XYZ dimension-ordered routing
// is the routing used for the main configuration (4x4x4 mesh). turn_allowed()
// is the table of turns the routing can take; the crossbar uses it to tie the
// impossible input/output pairs to ground, as the design does to save area.
package noc_pkg;

  localparam int unsigned NUM_PORTS = 7;
  localparam int unsigned PORT_W    = 3;
  localparam int unsigned COORD_W   = 4;   // up to 16 routers per dimension
  localparam int unsigned FLIT_W    = 32;  // payload bits per flit
  localparam int unsigned VC_W      = 3;   // up to 8 VCs per port

  typedef enum logic [PORT_W-1:0] {
    P_LOCAL = 3'd0,
    P_EAST  = 3'd1,
    P_WEST  = 3'd2,
    P_NORTH = 3'd3,
    P_SOUTH = 3'd4,
    P_UP    = 3'd5,
    P_DOWN  = 3'd6
  } port_e;

  typedef enum logic [1:0] {
    FT_HEAD   = 2'd0,
    FT_BODY   = 2'd1,
    FT_TAIL   = 2'd2,
    FT_SINGLE = 2'd3   // head and tail at once (one-flit packet)
  } flit_type_e;

  // Routing algorithm of a router; used by routing and crossbar pruning.
  typedef enum logic [1:0] {
    RT_XYZ   = 2'd0,   // dimension ordered, x first, then y, then z
    RT_FULL  = 2'd1    // XYZ routing, but fully connected crossbar (no pruning)
  } routing_e;

  typedef struct packed {
    logic [COORD_W-1:0] z;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  typedef struct packed {
    coord_t     dst;
    coord_t     src;
    logic [7:0] seq;
  } head_t;

  typedef struct packed {
    flit_type_e        ftype;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // One unidirectional link: a flit with the VC it travels on.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_t;

  // Credit returned upstream when a flit leaves an input buffer.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  function automatic logic is_head(flit_type_e t);
    return (t == FT_HEAD) || (t == FT_SINGLE);
  endfunction

  function automatic logic is_tail(flit_type_e t);
    return (t == FT_TAIL) || (t == FT_SINGLE);
  endfunction

  // XYZ dimension-ordered routing: correct x first, then y, then z.
  function automatic port_e route_xyz(coord_t cur, coord_t dst);
    if (dst.x > cur.x)      return P_EAST;
    else if (dst.x < cur.x) return P_WEST;
    else if (dst.y > cur.y) return P_NORTH;
    else if (dst.y < cur.y) return P_SOUTH;
    else if (dst.z > cur.z) return P_UP;
    else if (dst.z < cur.z) return P_DOWN;
    else                    return P_LOCAL;
  endfunction

  // Can a flit that entered on in_p leave on out_p under routing rt?
  // A flit entering on the west port travels east, so XYZ routing lets it
  // continue east, turn into y or z, or eject; it can never go back west.
  function automatic logic turn_allowed(routing_e rt, port_e in_p, port_e out_p);
    if (rt == RT_FULL) return 1'b1;
    if (in_p == out_p) return 1'b0;   // no U-turns, no local loopback
    case (in_p)
      P_LOCAL:          return 1'b1;
      P_EAST, P_WEST:   return 1'b1;  // x travel: any later dimension, no U-turn
      P_NORTH, P_SOUTH: return (out_p != P_EAST) && (out_p != P_WEST);
      P_UP, P_DOWN:     return (out_p == P_LOCAL) || (out_p == P_UP) || (out_p == P_DOWN);
      default:          return 1'b0;
    endcase
  endfunction

endpackage
