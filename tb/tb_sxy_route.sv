// tb_sxy_route -- directed test of the S-XY routing decision.
//
// Two instances, without (GUIDED = 0) and with router guiding (GUIDED = 1),
// are driven with hand-worked cases: plain XY moves, delivery to the local
// port and to a pin, the horizontal and vertical surround turns, the
// stamped packet moving along an obstacle and leaving it at the corner, the
// no-U-turn rule and the guide lines. Expected ports and stamps are written
// out per case.
module tb_sxy_route;
  import dynoc_pkg::*;

  coord_t     my_x, my_y, dest_x, dest_y;
  port_e      in_port;
  logic       stamp;
  logic [3:0] nb_act, edge_dir, guide;
  port_e      out_p0, out_p1;
  logic       out_s0, out_s1;

  int checks = 0;
  int failures = 0;

  sxy_route #(.GUIDED(1'b0)) u_plain (
    .my_x, .my_y, .in_port, .dest_x, .dest_y, .stamp, .nb_act, .edge_dir, .guide,
    .out_port(out_p0), .out_stamp(out_s0));
  sxy_route #(.GUIDED(1'b1)) u_guided (
    .my_x, .my_y, .in_port, .dest_x, .dest_y, .stamp, .nb_act, .edge_dir, .guide,
    .out_port(out_p1), .out_stamp(out_s1));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // nb_act/edge/guide bit order: {W, S, E, N}
  task automatic tcase(input string name,
                       input int x, input int y, input port_e from,
                       input int dx, input int dy, input logic st,
                       input logic [3:0] act, input logic [3:0] edg, input logic [3:0] gd,
                       input port_e exp_p0, input logic exp_s0,
                       input port_e exp_p1, input logic exp_s1);
    my_x = coord_t'(x); my_y = coord_t'(y); in_port = from;
    dest_x = coord_t'(dx); dest_y = coord_t'(dy); stamp = st;
    nb_act = act; edge_dir = edg; guide = gd;
    #1;
    checks += 2;
    if (out_p0 != exp_p0 || out_s0 != exp_s0) begin
      failures++;
      $display("FAIL %s (plain): got %s/%0b want %s/%0b", name, out_p0.name(), out_s0,
               exp_p0.name(), exp_s0);
    end
    if (out_p1 != exp_p1 || out_s1 != exp_s1) begin
      failures++;
      $display("FAIL %s (guided): got %s/%0b want %s/%0b", name, out_p1.name(), out_s1,
               exp_p1.name(), exp_s1);
    end
  endtask

  initial begin
    // --- N-XY, all neighbours active, interior router (2,2)
    tcase("xy east",   2,2,P_LOCAL, 3,1,0, 4'b1111,4'b0000,4'b0000, P_EAST,0,  P_EAST,0);
    tcase("xy west",   2,2,P_LOCAL, 1,3,0, 4'b1111,4'b0000,4'b0000, P_WEST,0,  P_WEST,0);
    tcase("xy south",  2,2,P_NORTH, 2,1,0, 4'b1111,4'b0000,4'b0000, P_SOUTH,0, P_SOUTH,0);
    tcase("xy north",  2,2,P_SOUTH, 2,3,0, 4'b1111,4'b0000,4'b0000, P_NORTH,0, P_NORTH,0);
    tcase("local",     2,2,P_WEST,  2,2,0, 4'b1111,4'b0000,4'b0000, P_LOCAL,0, P_LOCAL,0);
    // --- pin delivery at west edge router (1,2): W is an edge
    tcase("pin west",  1,2,P_EAST,  0,2,0, 4'b0111,4'b1000,4'b0000, P_WEST,0,  P_WEST,0);
    // --- east pin (4,3) seen from edge router (3,1): fix y first, then exit
    tcase("pin row",   3,1,P_WEST,  4,3,0, 4'b1001,4'b0110,4'b0000, P_NORTH,0, P_NORTH,0);
    tcase("pin exit",  3,3,P_SOUTH, 4,3,0, 4'b1100,4'b0011,4'b0000, P_EAST,0,  P_EAST,0);
    // --- SH-XY at (3,2), west neighbour deactivated, packet from east
    //     dest y >= own -> north; guided: guide[W]=0 -> south
    tcase("sh up",     3,2,P_EAST,  1,2,0, 4'b0111,4'b0000,4'b0000, P_NORTH,1, P_SOUTH,1);
    //     dest below -> south; guided guide[W]=1 -> north
    tcase("sh down",   3,2,P_EAST,  1,1,0, 4'b0111,4'b0000,4'b1000, P_SOUTH,1, P_NORTH,1);
    //     came from north: turning north would be a U-turn
    tcase("sh no uturn",3,2,P_NORTH,1,3,0, 4'b0111,4'b0000,4'b1000, P_SOUTH,1, P_SOUTH,1);
    //     north neighbour is an edge (pin) -> never used to detour
    tcase("sh edge",   3,3,P_EAST,  1,3,0, 4'b0110,4'b0001,4'b1000, P_SOUTH,1, P_SOUTH,1);
    // --- stamped packet moving north (came from south) along a west obstacle
    tcase("st along",  3,3,P_SOUTH, 1,2,1, 4'b0111,4'b0000,4'b0000, P_NORTH,1, P_NORTH,1);
    tcase("st corner", 3,3,P_SOUTH, 1,2,1, 4'b1111,4'b0000,4'b0000, P_WEST,0,  P_WEST,0);
    // --- SV-XY at (2,3): south neighbour deactivated, packet came from north
    //     plain: east; guided guide[S]=1 -> west
    tcase("sv turn",   2,3,P_NORTH, 2,1,0, 4'b1011,4'b0000,4'b0100, P_EAST,1,  P_WEST,1);
    //     guided guide[S]=0 -> east
    tcase("sv guide e",2,3,P_NORTH, 2,1,0, 4'b1011,4'b0000,4'b0000, P_EAST,1,  P_EAST,1);
    // --- the packet sent east is at (3,3), came from west, stamped:
    //     plain XY would send it back west (ping-pong); stamp keeps it going
    tcase("sv along",  3,3,P_WEST,  2,1,1, 4'b1011,4'b0000,4'b0000, P_EAST,1,  P_EAST,1);
    //     unstamped, the same packet is reflected to a turn, not back west
    tcase("sv corner", 3,3,P_WEST,  2,1,1, 4'b1111,4'b0000,4'b0000, P_SOUTH,0, P_SOUTH,0);
    // --- XY preference is a U-turn: east wanted but packet came from east
    tcase("uturn",     2,2,P_EAST,  3,3,0, 4'b1111,4'b0000,4'b0000, P_NORTH,1, P_NORTH,1);
    // --- stamped packet reaching its own row: stamp no longer applies
    tcase("st row",    3,2,P_WEST,  3,2,1, 4'b1011,4'b0000,4'b0000, P_LOCAL,0, P_LOCAL,0);
    // --- dead end: both turns and the straight way closed
    tcase("dead end",  2,2,P_EAST,  1,2,0, 4'b0010,4'b0000,4'b0000, P_EAST,0,  P_EAST,0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
