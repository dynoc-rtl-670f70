// tb_dynoc_router -- self-checking test of one DyNoC router.
//
// The router under test is (2,2) of a 3 x 3 mesh, with router guiding. The
// test drives its five input links and collects its five output links:
//   1. zero-load latency: a flit accepted in cycle t leaves in cycle t+2;
//   2. one flit per input, each to a different output, all in parallel;
//   3. four inputs to the local port: all arrive, one per cycle (the
//      arbiter serves each input within one round);
//   4. back-pressure: a stalled output holds its flit, the input buffer
//      fills and in_ready drops; nothing is lost or reordered afterwards;
//   5. surround: the west neighbour is deactivated, a west-bound flit turns
//      in the guide direction with its stamp set;
//   6. deactivation: an inactive router accepts and sends nothing.
module tb_dynoc_router;
  import dynoc_pkg::*;

  localparam int DEPTH = 4;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       active;
  logic [3:0] nb_act;
  logic [3:0] guide;
  logic       in_valid [5];
  logic       in_ready [5];
  flit_t      in_flit  [5];
  logic       out_valid[5];
  logic       out_ready[5];
  flit_t      out_flit [5];

  dynoc_router #(.X(2), .Y(2), .NX(3), .NY(3), .FIFO_DEPTH(DEPTH), .GUIDED(1'b1)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  flit_t  got[5][$];
  longint got_t[5][$];

  always @(posedge clk) begin
    for (int p = 0; p < 5; p++)
      if (rst_n && out_valid[p] && out_ready[p]) begin
        got[p].push_back(out_flit[p]);
        got_t[p].push_back(cycle);
      end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cycle);
    end
  endtask

  function automatic flit_t mk(input int dx, input int dy, input logic st, input int d);
    flit_t f;
    f.dx = coord_t'(dx); f.dy = coord_t'(dy); f.stamp = st; f.data = d;
    return f;
  endfunction

  task automatic clear_got();
    for (int p = 0; p < 5; p++) begin
      got[p].delete();
      got_t[p].delete();
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t0;

  initial begin
    rst_n = 1'b0; active = 1'b1; nb_act = 4'b1111; guide = 4'b0000;
    for (int p = 0; p < 5; p++) begin
      in_valid[p] = 1'b0; in_flit[p] = '0; out_ready[p] = 1'b1;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- 1. latency
    @(negedge clk);
    in_valid[P_LOCAL] = 1'b1; in_flit[P_LOCAL] = mk(3, 2, 0, 32'h11);
    t0 = cycle;                      // handshake at the next edge (cycle t0)
    @(negedge clk);
    in_valid[P_LOCAL] = 1'b0;
    repeat (4) @(negedge clk);
    check(got[P_EAST].size() == 1 && got[P_EAST][0] == mk(3, 2, 0, 32'h11), "latency flit east");
    if (got_t[P_EAST].size() == 1)
      check(got_t[P_EAST][0] == t0 + 2, $sformatf("2-cycle hop (%0d)", got_t[P_EAST][0] - t0));
    clear_got();

    // ---- 2. five inputs, five outputs
    @(negedge clk);
    in_flit[P_LOCAL] = mk(2, 3, 0, 1);  // -> north
    in_flit[P_NORTH] = mk(3, 3, 0, 2);  // -> east
    in_flit[P_EAST]  = mk(2, 1, 0, 3);  // -> south
    in_flit[P_SOUTH] = mk(1, 2, 0, 4);  // -> west
    in_flit[P_WEST]  = mk(2, 2, 0, 5);  // -> local
    for (int p = 0; p < 5; p++) in_valid[p] = 1'b1;
    @(negedge clk);
    for (int p = 0; p < 5; p++) in_valid[p] = 1'b0;
    repeat (4) @(negedge clk);
    check(got[P_NORTH].size() == 1 && got[P_NORTH][0].data == 1, "parallel north");
    check(got[P_EAST].size()  == 1 && got[P_EAST][0].data  == 2, "parallel east");
    check(got[P_SOUTH].size() == 1 && got[P_SOUTH][0].data == 3, "parallel south");
    check(got[P_WEST].size()  == 1 && got[P_WEST][0].data  == 4, "parallel west");
    check(got[P_LOCAL].size() == 1 && got[P_LOCAL][0].data == 5, "parallel local");
    for (int p = 0; p < 5; p++) if (got_t[p].size() == 1)
      check(got_t[p][0] == got_t[P_LOCAL][0], "parallel same cycle");
    clear_got();

    // ---- 3. contention: four inputs, three flits each, all to local
    @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      for (int p = 0; p < 4; p++) begin
        in_valid[p] = 1'b1; in_flit[p] = mk(2, 2, 0, 100 + 10*p + k);
      end
      @(negedge clk);
    end
    for (int p = 0; p < 4; p++) in_valid[p] = 1'b0;
    repeat (20) @(negedge clk);
    check(got[P_LOCAL].size() == 12, $sformatf("12 flits to local (%0d)", got[P_LOCAL].size()));
    if (got_t[P_LOCAL].size() == 12)
      check(got_t[P_LOCAL][11] - got_t[P_LOCAL][0] == 11, "one flit per cycle under contention");
    begin
      static int last[4] = '{-1, -1, -1, -1};
      static int served_round = 1;
      foreach (got[P_LOCAL][i]) begin
        int src, seq;
        src = (int'(got[P_LOCAL][i].data) - 100) / 10;
        seq = (int'(got[P_LOCAL][i].data) - 100) % 10;
        check(src >= 0 && src < 4 && seq == last[src] + 1, "per-input order kept");
        if (src >= 0 && src < 4) last[src] = seq;
      end
      // every input served once in each of the first four grants
      if (got[P_LOCAL].size() == 12) begin
        int seen = 0;
        for (int i = 0; i < 4; i++) seen |= 1 << ((int'(got[P_LOCAL][i].data) - 100) / 10);
        served_round = (seen == 15);
      end
      check(served_round == 1, "round-robin: each input in first round");
    end
    clear_got();

    // ---- 4. back-pressure on the east output
    @(negedge clk);
    out_ready[P_EAST] = 1'b0;
    in_valid[P_WEST] = 1'b1;
    for (int k = 0; k < DEPTH + 3; k++) begin
      in_flit[P_WEST] = mk(3, 2, 0, 200 + k);
      @(posedge clk);
      #1;
    end
    // one flit in the output register, DEPTH in the buffer
    check(!in_ready[P_WEST], "input buffer full: in_ready low");
    check(out_valid[P_EAST] && out_flit[P_EAST].data == 200, "stalled output holds first flit");
    in_valid[P_WEST] = 1'b0;
    @(negedge clk);
    out_ready[P_EAST] = 1'b1;
    repeat (10) @(negedge clk);
    check(got[P_EAST].size() == DEPTH + 1, $sformatf("all accepted flits out (%0d)", got[P_EAST].size()));
    foreach (got[P_EAST][i]) check(got[P_EAST][i].data == 200 + i, "order after stall");
    clear_got();

    // ---- 5. surround: west neighbour deactivated, guide[W] = 1 (north)
    @(negedge clk);
    nb_act = 4'b0111; guide = 4'b1000;
    in_valid[P_EAST] = 1'b1; in_flit[P_EAST] = mk(1, 1, 0, 300);   // wants west
    @(negedge clk);
    in_valid[P_EAST] = 1'b0;
    repeat (4) @(negedge clk);
    check(got[P_NORTH].size() == 1 && got[P_NORTH][0].data == 300 && got[P_NORTH][0].stamp,
          "blocked west: guided north with stamp");
    check(got[P_WEST].size() == 0, "nothing sent to deactivated neighbour");
    clear_got();
    // guide[W] = 0 (south)
    guide = 4'b0000;
    in_valid[P_EAST] = 1'b1; in_flit[P_EAST] = mk(1, 3, 0, 301);
    @(negedge clk);
    in_valid[P_EAST] = 1'b0;
    repeat (4) @(negedge clk);
    check(got[P_SOUTH].size() == 1 && got[P_SOUTH][0].data == 301 && got[P_SOUTH][0].stamp,
          "blocked west: guided south with stamp");
    clear_got();
    nb_act = 4'b1111;

    // ---- 6. deactivated router
    @(negedge clk);
    active = 1'b0;
    #1;
    check(!in_ready[P_LOCAL] && !in_ready[P_NORTH], "inactive: not ready");
    in_valid[P_LOCAL] = 1'b1; in_flit[P_LOCAL] = mk(3, 2, 0, 400);
    repeat (3) @(negedge clk);
    in_valid[P_LOCAL] = 1'b0;
    repeat (3) @(negedge clk);
    check(got[P_EAST].size() == 0, "inactive: nothing sent");
    active = 1'b1;
    repeat (3) @(negedge clk);
    check(got[P_EAST].size() == 0, "reactivated: no stale flit");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
