// dynoc_top -- DyNoC: a mesh network on chip whose routers can be covered
// by dynamically placed components.
//
// NX x NY routers (dynoc_router) are connected as a 2-D mesh. Router (x, y)
// with x = 1..NX, y = 1..NY is element [x-1][y-1] of every per-router
// array. Its local port is brought out (loc_*) for the PE or component that
// uses it. The outer ports of the edge routers are brought out as package
// pins (pin_n_*, pin_s_* indexed by column, pin_e_*, pin_w_* indexed by
// row); a packet addressed to (x, NY+1), (x, 0), (NX+1, y) or (0, y) leaves
// on that pin.
//
// The placed components are given as rectangles (comps). placement_lines
// turns them into router deactivation and guide lines: covered routers stop,
// their neighbours no longer send to them and route round them with S-XY
// routing (sxy_route). A component talks to the network through the local
// port of the router just above and right of its rectangle (access_x/y).
// The components themselves, and the reuse of covered router logic as
// component logic, are outside this RTL.
//
// Defaults follow the paper's prototype: a 3 x 3 mesh with 32-bit packet
// data. NCOMP (how many rectangles can be given) and FIFO_DEPTH are this
// design's choices. Links are valid/ready, one flit per cycle; two cycles
// per hop at zero load. Reset is synchronous, active low.
module dynoc_top
  import dynoc_pkg::*;
#(
  parameter int unsigned NX         = 3,
  parameter int unsigned NY         = 3,
  parameter int unsigned NCOMP      = 4,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter bit          GUIDED     = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  // placed components
  input  comp_rect_t comps          [NCOMP],
  output logic       router_active  [NX][NY],
  output coord_t     access_x       [NCOMP],
  output coord_t     access_y       [NCOMP],
  // local ports
  input  logic       loc_in_valid   [NX][NY],
  output logic       loc_in_ready   [NX][NY],
  input  flit_t      loc_in_flit    [NX][NY],
  output logic       loc_out_valid  [NX][NY],
  input  logic       loc_out_ready  [NX][NY],
  output flit_t      loc_out_flit   [NX][NY],
  // pins on the north and south edges (one per column)
  input  logic       pin_n_in_valid [NX],
  output logic       pin_n_in_ready [NX],
  input  flit_t      pin_n_in_flit  [NX],
  output logic       pin_n_out_valid[NX],
  input  logic       pin_n_out_ready[NX],
  output flit_t      pin_n_out_flit [NX],
  input  logic       pin_s_in_valid [NX],
  output logic       pin_s_in_ready [NX],
  input  flit_t      pin_s_in_flit  [NX],
  output logic       pin_s_out_valid[NX],
  input  logic       pin_s_out_ready[NX],
  output flit_t      pin_s_out_flit [NX],
  // pins on the east and west edges (one per row)
  input  logic       pin_e_in_valid [NY],
  output logic       pin_e_in_ready [NY],
  input  flit_t      pin_e_in_flit  [NY],
  output logic       pin_e_out_valid[NY],
  input  logic       pin_e_out_ready[NY],
  output flit_t      pin_e_out_flit [NY],
  input  logic       pin_w_in_valid [NY],
  output logic       pin_w_in_ready [NY],
  input  flit_t      pin_w_in_flit  [NY],
  output logic       pin_w_out_valid[NY],
  input  logic       pin_w_out_ready[NY],
  output flit_t      pin_w_out_flit [NY]
);
  logic       act   [NX][NY];
  logic [3:0] guide [NX][NY];

  placement_lines #(.NX(NX), .NY(NY), .NCOMP(NCOMP)) u_place (
    .comps   (comps),
    .active  (act),
    .guide   (guide),
    .access_x(access_x),
    .access_y(access_y)
  );

  // Per-router port bundles, indexed [x][y][port].
  logic  r_in_valid [NX][NY][5];
  logic  r_in_ready [NX][NY][5];
  flit_t r_in_flit  [NX][NY][5];
  logic  r_out_valid[NX][NY][5];
  logic  r_out_ready[NX][NY][5];
  flit_t r_out_flit [NX][NY][5];

  for (genvar gx = 0; gx < NX; gx++) begin : g_x
    for (genvar gy = 0; gy < NY; gy++) begin : g_y
      logic [3:0] nb_act;

      assign router_active[gx][gy] = act[gx][gy];

      // neighbour activity; off-mesh sides read 0 (they are pins)
      assign nb_act[0] = (gy < NY-1) ? act[gx][(gy < NY-1) ? gy+1 : gy] : 1'b0;
      assign nb_act[1] = (gx < NX-1) ? act[(gx < NX-1) ? gx+1 : gx][gy] : 1'b0;
      assign nb_act[2] = (gy > 0)    ? act[gx][(gy > 0) ? gy-1 : gy]    : 1'b0;
      assign nb_act[3] = (gx > 0)    ? act[(gx > 0) ? gx-1 : gx][gy]    : 1'b0;

      dynoc_router #(
        .X(gx + 1), .Y(gy + 1), .NX(NX), .NY(NY),
        .FIFO_DEPTH(FIFO_DEPTH), .GUIDED(GUIDED)
      ) u_router (
        .clk      (clk),
        .rst_n    (rst_n),
        .active   (act[gx][gy]),
        .nb_act   (nb_act),
        .guide    (guide[gx][gy]),
        .in_valid (r_in_valid[gx][gy]),
        .in_ready (r_in_ready[gx][gy]),
        .in_flit  (r_in_flit[gx][gy]),
        .out_valid(r_out_valid[gx][gy]),
        .out_ready(r_out_ready[gx][gy]),
        .out_flit (r_out_flit[gx][gy])
      );

      // local port
      assign r_in_valid[gx][gy][P_LOCAL]  = loc_in_valid[gx][gy];
      assign r_in_flit[gx][gy][P_LOCAL]   = loc_in_flit[gx][gy];
      assign loc_in_ready[gx][gy]         = r_in_ready[gx][gy][P_LOCAL];
      assign loc_out_valid[gx][gy]        = r_out_valid[gx][gy][P_LOCAL];
      assign loc_out_flit[gx][gy]         = r_out_flit[gx][gy][P_LOCAL];
      assign r_out_ready[gx][gy][P_LOCAL] = loc_out_ready[gx][gy];

      // north side
      if (gy == NY-1) begin : g_n_pin
        assign r_in_valid[gx][gy][P_NORTH]  = pin_n_in_valid[gx];
        assign r_in_flit[gx][gy][P_NORTH]   = pin_n_in_flit[gx];
        assign pin_n_in_ready[gx]           = r_in_ready[gx][gy][P_NORTH];
        assign pin_n_out_valid[gx]          = r_out_valid[gx][gy][P_NORTH];
        assign pin_n_out_flit[gx]           = r_out_flit[gx][gy][P_NORTH];
        assign r_out_ready[gx][gy][P_NORTH] = pin_n_out_ready[gx];
      end else begin : g_n_link
        assign r_in_valid[gx][gy][P_NORTH]  = r_out_valid[gx][gy+1][P_SOUTH];
        assign r_in_flit[gx][gy][P_NORTH]   = r_out_flit[gx][gy+1][P_SOUTH];
        assign r_out_ready[gx][gy][P_NORTH] = r_in_ready[gx][gy+1][P_SOUTH];
      end

      // south side
      if (gy == 0) begin : g_s_pin
        assign r_in_valid[gx][gy][P_SOUTH]  = pin_s_in_valid[gx];
        assign r_in_flit[gx][gy][P_SOUTH]   = pin_s_in_flit[gx];
        assign pin_s_in_ready[gx]           = r_in_ready[gx][gy][P_SOUTH];
        assign pin_s_out_valid[gx]          = r_out_valid[gx][gy][P_SOUTH];
        assign pin_s_out_flit[gx]           = r_out_flit[gx][gy][P_SOUTH];
        assign r_out_ready[gx][gy][P_SOUTH] = pin_s_out_ready[gx];
      end else begin : g_s_link
        assign r_in_valid[gx][gy][P_SOUTH]  = r_out_valid[gx][gy-1][P_NORTH];
        assign r_in_flit[gx][gy][P_SOUTH]   = r_out_flit[gx][gy-1][P_NORTH];
        assign r_out_ready[gx][gy][P_SOUTH] = r_in_ready[gx][gy-1][P_NORTH];
      end

      // east side
      if (gx == NX-1) begin : g_e_pin
        assign r_in_valid[gx][gy][P_EAST]  = pin_e_in_valid[gy];
        assign r_in_flit[gx][gy][P_EAST]   = pin_e_in_flit[gy];
        assign pin_e_in_ready[gy]          = r_in_ready[gx][gy][P_EAST];
        assign pin_e_out_valid[gy]         = r_out_valid[gx][gy][P_EAST];
        assign pin_e_out_flit[gy]          = r_out_flit[gx][gy][P_EAST];
        assign r_out_ready[gx][gy][P_EAST] = pin_e_out_ready[gy];
      end else begin : g_e_link
        assign r_in_valid[gx][gy][P_EAST]  = r_out_valid[gx+1][gy][P_WEST];
        assign r_in_flit[gx][gy][P_EAST]   = r_out_flit[gx+1][gy][P_WEST];
        assign r_out_ready[gx][gy][P_EAST] = r_in_ready[gx+1][gy][P_WEST];
      end

      // west side
      if (gx == 0) begin : g_w_pin
        assign r_in_valid[gx][gy][P_WEST]  = pin_w_in_valid[gy];
        assign r_in_flit[gx][gy][P_WEST]   = pin_w_in_flit[gy];
        assign pin_w_in_ready[gy]          = r_in_ready[gx][gy][P_WEST];
        assign pin_w_out_valid[gy]         = r_out_valid[gx][gy][P_WEST];
        assign pin_w_out_flit[gy]          = r_out_flit[gx][gy][P_WEST];
        assign r_out_ready[gx][gy][P_WEST] = pin_w_out_ready[gy];
      end else begin : g_w_link
        assign r_in_valid[gx][gy][P_WEST]  = r_out_valid[gx-1][gy][P_EAST];
        assign r_in_flit[gx][gy][P_WEST]   = r_out_flit[gx-1][gy][P_EAST];
        assign r_out_ready[gx][gy][P_WEST] = r_in_ready[gx-1][gy][P_EAST];
      end
    end
  end
endmodule
