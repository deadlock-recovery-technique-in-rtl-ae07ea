// noc_pkg: types and constants shared by the bus-enhanced mesh NoC.
//
// The network is a 4x4 two-dimensional mesh (the size the design is evaluated
// at). Packets are wormhole-switched sequences of flits; the header flit carries
// the destination coordinates that the routers and the processing-element bus
// interfaces compare against their own. The flit layout below (2-bit type,
// 2-bit coordinates, 32-bit payload) is this implementation's choice; the
// source coordinates are carried in every flit only to make checking easy.
// Router ports are numbered N, E, S, W, Local; y grows towards North.
package noc_pkg;

  parameter int unsigned MESH_X    = 4;
  parameter int unsigned MESH_Y    = 4;
  parameter int unsigned NUM_NODES = MESH_X * MESH_Y;
  parameter int unsigned COORD_W   = 2;
  parameter int unsigned DATA_W    = 32;

  // Router port numbering (the mesh ports, then the local PE port).
  parameter int unsigned NUM_PORTS = 5;
  parameter int unsigned PORT_W    = 3;
  parameter int unsigned P_N = 0;
  parameter int unsigned P_E = 1;
  parameter int unsigned P_S = 2;
  parameter int unsigned P_W = 3;
  parameter int unsigned P_L = 4;

  typedef enum logic [1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3
  } flit_type_e;

  typedef struct packed {
    flit_type_e         ftype;
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    logic [DATA_W-1:0]  data;
  } flit_t;

  function automatic logic is_head(flit_type_e t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(flit_type_e t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction

  // Minimal routing: the set of productive output ports for a header at
  // router (x, y). Local only when the header has arrived.
  function automatic logic [NUM_PORTS-1:0] productive_ports(
      input logic [COORD_W-1:0] x, input logic [COORD_W-1:0] y,
      input logic [COORD_W-1:0] dx, input logic [COORD_W-1:0] dy);
    logic [NUM_PORTS-1:0] m;
    m = '0;
    if (dx > x) m[P_E] = 1'b1;
    if (dx < x) m[P_W] = 1'b1;
    if (dy > y) m[P_N] = 1'b1;
    if (dy < y) m[P_S] = 1'b1;
    if (m == '0)     m[P_L] = 1'b1;
    return m;
  endfunction

endpackage
