// sxy_route -- output-port decision of a DyNoC router (S-XY routing with
// optional router guiding). Purely combinational.
//
// Normal mode (N-XY): the packet moves east/west until its x matches, then
// north/south until its y matches, then leaves on the local port.
//
// Surround-horizontal mode (SH-XY): when the wanted east/west neighbour is
// deactivated, the packet turns north if its destination y is greater than
// or equal to the router's y, else south (paper, Section 4.1). Surround-
// vertical mode (SV-XY): when the wanted north/south neighbour is
// deactivated the packet turns east (the paper leaves the side free and
// uses "the right" in its example). In both cases the packet is stamped.
// A stamped packet keeps going straight along the obstacle; the first
// router whose neighbour on the obstacle side is active again (the corner
// of the ring around the component) clears the stamp and sends the packet
// round the corner, after which normal XY routing resumes.
//
// The paper's stamp is a single bit. The direction in which a stamped packet
// keeps moving is taken from the port it arrived on (straight on), and the
// obstacle side from the destination (the side of the other axis towards
// the destination); this reading is this design's own.
//
// Router guiding (GUIDED = 1): a component also drives, on each line to a
// bordering router, the direction to take when a packet is blocked by it
// (0 = east or south, 1 = west or north, Figure 6). The guide then replaces
// the turn choices above. The stamp is still used to carry the packet to the
// corner; the paper states stamping is no longer needed with guiding, but
// without it the reflection ("ping-pong") of Figure 4 returns, so it is kept.
//
// The paper describes N-XY, SH-XY and SV-XY as modes a router enters when
// a neighbour is deactivated; here the mode is chosen per packet from the
// same neighbour state, which gives the same decisions.
//
// The turn never sends a packet back out of the port it came in on; a
// deactivated neighbour or a mesh edge (pin side) is never used to detour.
//
// Interface: dest_x/dest_y/stamp come from the head flit, in_port is the
// port it arrived on, my_x/my_y the router's coordinates. nb_act[d] is 1 when the neighbouring router in direction d is
// active; edge[d] marks directions leading off the mesh to the pins, which
// are used only to deliver a packet addressed to that pin; guide[d] is the
// guide line from the component bordering on side d.
module sxy_route
  import dynoc_pkg::*;
#(
  parameter bit GUIDED = 1'b1
) (
  input  coord_t     my_x,
  input  coord_t     my_y,
  input  port_e      in_port,
  input  coord_t     dest_x,
  input  coord_t     dest_y,
  input  logic       stamp,
  input  logic [3:0] nb_act,
  input  logic [3:0] edge_dir,
  input  logic [3:0] guide,
  output port_e      out_port,
  output logic       out_stamp
);

  // Neighbour d may be used to forward (not as a pin delivery).
  function automatic logic usable(input port_e d, input port_e from,
                                  input logic [3:0] act, input logic [3:0] edg);
    if (d == P_LOCAL) return 1'b0;
    return act[d[1:0]] && !edg[d[1:0]] && (d != from);
  endfunction

  port_e pref;          // plain XY choice
  logic  pref_ok;
  port_e first, second, straight, side;
  logic  side_valid;
  logic  col_done, row_done;

  always_comb begin
    // ---------------- XY preference
    // A pin beyond an edge is reached from the edge router in its row or
    // column: there the pin's x (or y) already counts as reached, so the
    // packet first corrects the other coordinate inside the mesh.
    col_done = (dest_x == my_x) || (edge_dir[2'(P_EAST)] && dest_x > my_x) ||
               (edge_dir[2'(P_WEST)] && dest_x < my_x);
    row_done = (dest_y == my_y) || (edge_dir[2'(P_NORTH)] && dest_y > my_y) ||
               (edge_dir[2'(P_SOUTH)] && dest_y < my_y);
    if (!col_done && dest_x > my_x)      pref = P_EAST;
    else if (!col_done)                  pref = P_WEST;
    else if (!row_done && dest_y > my_y) pref = P_NORTH;
    else if (!row_done)                  pref = P_SOUTH;
    else if (dest_x > my_x)              pref = P_EAST;    // east pin
    else if (dest_x < my_x)              pref = P_WEST;    // west pin
    else if (dest_y > my_y)              pref = P_NORTH;   // north pin
    else if (dest_y < my_y)              pref = P_SOUTH;   // south pin
    else                                 pref = P_LOCAL;

    if (pref == P_LOCAL)
      pref_ok = 1'b1;
    else if (edge_dir[pref[1:0]])
      pref_ok = (pref != in_port);            // deliver to the pin
    else
      pref_ok = usable(pref, in_port, nb_act, edge_dir);

    // ---------------- detour candidates for a blocked preference
    first = P_NORTH;
    if (pref == P_EAST || pref == P_WEST) begin
      if (GUIDED && !nb_act[pref[1:0]] && !edge_dir[pref[1:0]])
        first = guide[pref[1:0]] ? P_NORTH : P_SOUTH;
      else
        first = (dest_y >= my_y) ? P_NORTH : P_SOUTH;
    end else if (pref == P_NORTH || pref == P_SOUTH) begin
      if (GUIDED && !nb_act[pref[1:0]] && !edge_dir[pref[1:0]])
        first = guide[pref[1:0]] ? P_WEST : P_EAST;
      else
        first = P_EAST;
    end
    second = opposite(first);

    // ---------------- stamped packet: straight on, obstacle on `side`
    straight = opposite(in_port);
    side       = P_LOCAL;
    side_valid = 1'b0;
    if (straight == P_NORTH || straight == P_SOUTH) begin
      if (dest_x > my_x)      begin side = P_EAST; side_valid = 1'b1; end
      else if (dest_x < my_x) begin side = P_WEST; side_valid = 1'b1; end
    end else if (straight == P_EAST || straight == P_WEST) begin
      if (dest_y > my_y)      begin side = P_NORTH; side_valid = 1'b1; end
      else if (dest_y < my_y) begin side = P_SOUTH; side_valid = 1'b1; end
    end

    // ---------------- decision
    out_port  = pref;
    out_stamp = 1'b0;
    if (stamp && in_port != P_LOCAL && side_valid &&
        usable(side, in_port, nb_act, edge_dir)) begin
      out_port  = side;                       // corner reached: unstamp
      out_stamp = 1'b0;
    end else if (stamp && in_port != P_LOCAL && side_valid &&
                 usable(straight, in_port, nb_act, edge_dir)) begin
      out_port  = straight;                   // keep surrounding
      out_stamp = 1'b1;
    end else if (pref_ok) begin
      out_port  = pref;                       // N-XY
      out_stamp = 1'b0;
    end else if (usable(first, in_port, nb_act, edge_dir)) begin
      out_port  = first;                      // SH-XY / SV-XY turn
      out_stamp = 1'b1;
    end else if (usable(second, in_port, nb_act, edge_dir)) begin
      out_port  = second;
      out_stamp = 1'b1;
    end else if (usable(opposite(pref), in_port, nb_act, edge_dir)) begin
      out_port  = opposite(pref);             // dead end: back off
      out_stamp = 1'b0;
    end else begin
      out_port  = in_port;                    // only way out
      out_stamp = 1'b0;
    end
  end
endmodule
