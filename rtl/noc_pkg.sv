// noc_pkg: types and constants shared by the heterogeneous 3D NoC.
//
// A flit carries N = FLIT_W = 32 data bits (the link width used for the
// evaluated NoC) plus two sideband bits that mark the head and the tail of a
// wormhole packet. The head flit's data holds the destination and source
// router addresses (column x, row y, layer z) and an 8-bit tag; this layout is
// a choice of this design. Layer z = 0 is the top (slowest, mixed-signal)
// layer, larger z is further down and faster, as in the paper's ordering of
// layers by technology node. Rows grow to the south, columns to the east.
package noc_pkg;

  localparam int unsigned FLIT_W  = 32;  // N, link width in bits
  localparam int unsigned COORD_W = 4;   // bits per address component
  localparam int unsigned CRED_W  = 4;   // credit counts returned per cycle
  localparam int unsigned NPORTS  = 7;

  // Router ports; the numbering is also the index into the port arrays.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4,
    P_UP    = 3'd5,
    P_DOWN  = 3'd6
  } port_e;

  // Routing function: R1 = Z+(XY)Z-, R2 = ZXYZ (R1 plus the detour through
  // the faster layer for long distances), and plain dimension-order XYZ as
  // the baseline the two are compared with.
  typedef enum logic [1:0] {
    ALG_ZPXYZM = 2'd0,
    ALG_ZXYZ   = 2'd1,
    ALG_XYZ    = 2'd2
  } routing_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] z;
  } coord_t;

  typedef struct packed {
    coord_t     dst;
    coord_t     src;
    logic [7:0] tag;
  } head_t;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  typedef logic [CRED_W-1:0] cred_t;

  // Hop-distance threshold that never triggers a detour (the paper's "infinity").
  localparam logic [7:0] PHI_INF = 8'hFF;

  function automatic coord_t head_dst(flit_t f);
    head_t h;
    h = head_t'(f.data);
    return h.dst;
  endfunction

endpackage
