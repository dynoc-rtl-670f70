// placement_lines -- activation and guide lines driven by placed components.
//
// A component placed on the device covers a rectangle of routers; those
// routers are deactivated (active = 0) and the component tells the routers
// around it, on one line per side, that it is there (through their view of
// the deactivated neighbour) and, with router guiding, which way to go round
// it. The guide value follows Figure 6 of the DyNoC paper: a router on the
// top or bottom side is sent towards the nearer of the two corners
// (1 = west, 0 = east); a router on the left or right side towards the
// nearer corner (1 = north, 0 = south). Figure 6 shows a five-router side
// split three north / two south, so a tie goes to north; a tie on a
// horizontal side goes to west by the same rule (this design's choice).
//
// Each component reaches the network through the router at the corner just
// above and to the right of its rectangle (the paper's "upper right" router);
// its coordinates are given on access_x/access_y.
//
// Interface: comps[c] is a rectangle in router coordinates (x = 1..NX,
// y = 1..NY). active[x-1][y-1] and guide[x-1][y-1][d] (d in port_e order N,
// E, S, W) are per router. Purely combinational. Components must not
// overlap or abut (the paper requires a ring of routers round each); the
// logic does not check this.
module placement_lines
  import dynoc_pkg::*;
#(
  parameter int unsigned NX    = 3,
  parameter int unsigned NY    = 3,
  parameter int unsigned NCOMP = 4
) (
  input  comp_rect_t comps    [NCOMP],
  output logic       active   [NX][NY],
  output logic [3:0] guide    [NX][NY],
  output coord_t     access_x [NCOMP],
  output coord_t     access_y [NCOMP]
);
  // Is router (x, y) inside rectangle r?
  function automatic logic covers(input comp_rect_t r, input int x, input int y);
    return r.valid && (r.w != 0) && (r.h != 0) &&
           (x >= int'(r.x0)) && (x < int'(r.x0) + int'(r.w)) &&
           (y >= int'(r.y0)) && (y < int'(r.y0) + int'(r.h));
  endfunction

  // Router in column x on a top/bottom side: 1 (west) when the west corner
  // is at least as near as the east corner.
  function automatic logic west_first(input coord_t x0, input coord_t w, input int x);
    int k;
    k = x - int'(x0);
    return (k + 1 <= int'(w) - k);
  endfunction

  // Router in row y on a left/right side: 1 (north) when the north corner
  // is at least as near as the south corner.
  function automatic logic north_first(input coord_t y0, input coord_t h, input int y);
    int k;
    k = y - int'(y0);
    return (int'(h) - k <= k + 1);
  endfunction

  for (genvar c = 0; c < NCOMP; c++) begin : g_acc
    assign access_x[c] = comps[c].x0 + comps[c].w;
    assign access_y[c] = comps[c].y0 + comps[c].h;
  end

  for (genvar gx = 0; gx < NX; gx++) begin : g_x
    for (genvar gy = 0; gy < NY; gy++) begin : g_y
      localparam int X = gx + 1;
      localparam int Y = gy + 1;
      always_comb begin
        active[gx][gy] = 1'b1;
        guide[gx][gy]  = 4'b0000;
        for (int c = 0; c < NCOMP; c++) begin
          if (covers(comps[c], X, Y)) active[gx][gy] = 1'b0;
          // component to the north: router on its bottom side
          if (covers(comps[c], X, Y + 1)) begin
            guide[gx][gy][0] = west_first(comps[c].x0, comps[c].w, X);   // N
          end
          // component to the south: router on its top side
          if (covers(comps[c], X, Y - 1)) begin
            guide[gx][gy][2] = west_first(comps[c].x0, comps[c].w, X);   // S
          end
          // component to the east: router on its left side
          if (covers(comps[c], X + 1, Y)) begin
            guide[gx][gy][1] = north_first(comps[c].y0, comps[c].h, Y);  // E
          end
          // component to the west: router on its right side
          if (covers(comps[c], X - 1, Y)) begin
            guide[gx][gy][3] = north_first(comps[c].y0, comps[c].h, Y);  // W
          end
        end
        // a covered router takes no guide
        if (!active[gx][gy]) guide[gx][gy] = 4'b0000;
      end
    end
  end
endmodule
