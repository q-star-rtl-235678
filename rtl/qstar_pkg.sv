// qstar_pkg -- types and constants shared by the BiDOR network-on-chip.
//
// The network is a 2D mesh of input-queued wormhole routers. Every router has
// four bidirectional ports (N, E, S, W); a port that faces the edge of the mesh
// is an I/O port of the network, so a MESH_X x MESH_Y mesh has 2*(MESH_X+MESH_Y)
// I/O ports (20 for the 5x5 mesh). Nodes are numbered id = y*MESH_X + x with
// node 0 in the north-west corner, x growing eastwards and y southwards.
//
// Two virtual channels are used and they never mix: VC0 carries packets that
// follow the XY route, VC1 packets that follow the YX route. The VC of a packet
// is picked once, at injection, from the source node's route bitmap.
//
// A flit carries its destination node (x, y) and the direction of the I/O port
// it must leave by at that node, so that a corner node's two I/O ports can be
// told apart. Only the head flit's routing fields are used; body flits follow
// the route stored by the head. The flit payload width is this design's choice.
//
// I/O port numbering (this design's choice): ports 0..X-1 are the north edge
// from west to east, X..X+Y-1 the east edge from north to south, X+Y..2X+Y-1
// the south edge from west to east and 2X+Y..2X+2Y-1 the west edge from north
// to south.
package qstar_pkg;

  localparam int NUM_VC    = 2;   // VC0 = XY-routed, VC1 = YX-routed
  localparam int NUM_PORT  = 4;   // N, E, S, W
  localparam int PAYLOAD_W = 32;  // flit payload bits
  localparam int COORD_W   = 3;   // meshes up to 8 x 8

  localparam logic VC_XY = 1'b0;
  localparam logic VC_YX = 1'b1;

  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_E = 2'd1,
    DIR_S = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  typedef struct packed {
    logic                 head;
    logic                 tail;
    logic [COORD_W-1:0]   dst_x;
    logic [COORD_W-1:0]   dst_y;
    dir_e                 dst_dir;
    logic [PAYLOAD_W-1:0] data;
  } flit_t;

  // One direction of a channel: a flit, the VC it travels on, and its valid.
  typedef struct packed {
    logic  valid;
    logic  vc;
    flit_t flit;
  } link_t;

  // Opposite side of a port: a flit leaving by E arrives on the neighbour's W.
  function automatic dir_e opposite(dir_e d);
    case (d)
      DIR_N:   return DIR_S;
      DIR_E:   return DIR_W;
      DIR_S:   return DIR_N;
      default: return DIR_E;
    endcase
  endfunction

  function automatic int io_count(int mx, int my);
    return 2 * (mx + my);
  endfunction

  // I/O port number of port d of node (x, y), or -1 if that port faces a neighbour.
  function automatic int io_index(int x, int y, int d, int mx, int my);
    case (d)
      0:       return (y == 0)      ? x               : -1;
      1:       return (x == mx - 1) ? mx + y          : -1;
      2:       return (y == my - 1) ? mx + my + x     : -1;
      default: return (x == 0)      ? 2 * mx + my + y : -1;
    endcase
  endfunction

  function automatic int io_x(int p, int mx, int my);
    if (p < mx)               return p;
    else if (p < mx + my)     return mx - 1;
    else if (p < 2 * mx + my) return p - (mx + my);
    else                      return 0;
  endfunction

  function automatic int io_y(int p, int mx, int my);
    if (p < mx)               return 0;
    else if (p < mx + my)     return p - mx;
    else if (p < 2 * mx + my) return my - 1;
    else                      return p - (2 * mx + my);
  endfunction

  function automatic dir_e io_dir(int p, int mx, int my);
    if (p < mx)               return DIR_N;
    else if (p < mx + my)     return DIR_E;
    else if (p < 2 * mx + my) return DIR_S;
    else                      return DIR_W;
  endfunction

endpackage
