// dynoc_pkg -- types and constants shared by the DyNoC routers, the mesh
// and the placement logic.
//
// A packet is a single flit: destination coordinates, the one-bit surround
// stamp of S-XY routing, and a data word. The 32-bit data word is the width
// of the traffic-light / color-generator prototype (12-bit X, 12-bit Y,
// 24-bit color, carried in 32-bit packets). The coordinate width, the packet
// being one flit, and the port numbering are this design's own choices.
//
// Coordinates: routers sit at x = 1..NX (west to east) and y = 1..NY (south
// to north); x = 0, x = NX+1, y = 0 and y = NY+1 address the package pins
// beyond the mesh edge, which act as the outer neighbours of the edge
// routers. Y grows northwards, as in the routing rule "destination Y greater
// or equal -> send upwards".
package dynoc_pkg;

  localparam int unsigned DATA_W  = 32;  // packet payload width
  localparam int unsigned COORD_W = 4;   // up to 14 x 14 routers plus pin ring

  typedef logic [COORD_W-1:0] coord_t;

  // Router ports. The four mesh directions come first so that a 2-bit
  // value can index them.
  typedef enum logic [2:0] {
    P_NORTH = 3'd0,
    P_EAST  = 3'd1,
    P_SOUTH = 3'd2,
    P_WEST  = 3'd3,
    P_LOCAL = 3'd4
  } port_e;


  typedef struct packed {
    coord_t              dx;     // destination x
    coord_t              dy;     // destination y
    logic                stamp;  // 1: packet is surrounding an obstacle
    logic [DATA_W-1:0]   data;
  } flit_t;


  // Rectangle of a placed component, in router coordinates. It covers the
  // routers x0..x0+w-1, y0..y0+h-1; w = 0 or h = 0 is treated as empty.
  typedef struct packed {
    logic   valid;
    coord_t x0;
    coord_t y0;
    coord_t w;
    coord_t h;
  } comp_rect_t;

  function automatic port_e opposite(input port_e p);
    case (p)
      P_NORTH: return P_SOUTH;
      P_SOUTH: return P_NORTH;
      P_EAST:  return P_WEST;
      P_WEST:  return P_EAST;
      default: return P_LOCAL;
    endcase
  endfunction

endpackage
