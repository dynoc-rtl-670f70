// tb_placement_lines -- self-checking test of the activation/guide lines.
//
// A 9 x 7 mesh holds two components: A covers x = 2..5, y = 2..6 (the 4-wide,
// 5-tall module of the router-guiding figure) and B covers the single router
// (8,4). The expected activation, guide bits and access routers are written
// out by hand: on A's top and bottom sides the two western routers get 1
// (west) and the two eastern ones 0 (east); on its left and right sides the
// upper three get 1 (north) and the lower two 0 (south). Then A is removed
// and its routers must be active again.
module tb_placement_lines;
  import dynoc_pkg::*;

  localparam int NX = 9, NY = 7, NCOMP = 2;

  comp_rect_t comps    [NCOMP];
  logic       active   [NX][NY];
  logic [3:0] guide    [NX][NY];
  coord_t     access_x [NCOMP];
  coord_t     access_y [NCOMP];

  placement_lines #(.NX(NX), .NY(NY), .NCOMP(NCOMP)) dut (.*);

  int checks = 0;
  int failures = 0;

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic in_a(int x, int y);
    return x >= 2 && x <= 5 && y >= 2 && y <= 6;
  endfunction

  // expected guide nibble {W,S,E,N} of router (x,y) with A and (optionally) B
  function automatic logic [3:0] exp_guide(int x, int y, logic a_on);
    logic [3:0] g = 4'b0000;
    if (a_on) begin
      if (y == 7 && x >= 2 && x <= 5) g[2] = (x <= 3);   // top side, S blocked
      if (y == 1 && x >= 2 && x <= 5) g[0] = (x <= 3);   // bottom side, N blocked
      if (x == 1 && y >= 2 && y <= 6) g[1] = (y >= 4);   // left side, E blocked
      if (x == 6 && y >= 2 && y <= 6) g[3] = (y >= 4);   // right side, W blocked
    end
    if (x == 7 && y == 4) g[1] = 1'b1;
    if (x == 9 && y == 4) g[3] = 1'b1;
    if (x == 8 && y == 5) g[2] = 1'b1;
    if (x == 8 && y == 3) g[0] = 1'b1;
    return g;
  endfunction

  task automatic check_all(logic a_on);
    for (int x = 1; x <= NX; x++)
      for (int y = 1; y <= NY; y++) begin
        logic exp_act;
        exp_act = !((a_on && in_a(x, y)) || (x == 8 && y == 4));
        checks += 2;
        if (active[x-1][y-1] != exp_act) begin
          failures++;
          $display("FAIL active (%0d,%0d) got %0b", x, y, active[x-1][y-1]);
        end
        if (guide[x-1][y-1] != exp_guide(x, y, a_on)) begin
          failures++;
          $display("FAIL guide (%0d,%0d) got %b want %b", x, y, guide[x-1][y-1],
                   exp_guide(x, y, a_on));
        end
      end
  endtask

  initial begin
    comps[0] = '{valid: 1'b1, x0: 4'd2, y0: 4'd2, w: 4'd4, h: 4'd5};
    comps[1] = '{valid: 1'b1, x0: 4'd8, y0: 4'd4, w: 4'd1, h: 4'd1};
    #1;
    check_all(1'b1);
    checks += 2;
    if (access_x[0] != 6 || access_y[0] != 7) begin
      failures++; $display("FAIL access A (%0d,%0d)", access_x[0], access_y[0]);
    end
    if (access_x[1] != 9 || access_y[1] != 5) begin
      failures++; $display("FAIL access B (%0d,%0d)", access_x[1], access_y[1]);
    end
    // component A completes: its routers return to their default state
    comps[0].valid = 1'b0;
    #1;
    check_all(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
