// tb_dynoc_top -- end-to-end test of the DyNoC mesh at its default size.
//
// The 3 x 3 mesh is run as in the traffic-light prototype: the router at
// (2,2) is covered by a 1 x 1 component (so every packet that would cross
// it must go round), and all other routers and the twelve pins exchange
// random packets. Each packet carries a unique tag; a scoreboard checks that
// it arrives once, unchanged, at the local port or pin it was addressed to.
// Receivers stall at random, so links see back-pressure.
//
// Phases: (1) idle-network latency checks, straight and round the obstacle;
// (2) random traffic round the covered router; (3) the component is removed
// (after the network drains) and traffic now also reaches (2,2); (4) the
// component is placed again and traffic resumes. The test counts how often
// each mechanism occurs -- horizontal surround turn (SH-XY), vertical
// surround turn (SV-XY), stamp removal at a corner, link stall, output
// contention, pin delivery, local delivery, deactivation and reactivation --
// and counts a failure for each that never occurs.
module tb_dynoc_top;
  import dynoc_pkg::*;

  localparam int NX = 3, NY = 3, NCOMP = 4;
  localparam int NLOC = NX * NY;
  localparam int NS   = NLOC + 2 * NX + 2 * NY;   // traffic endpoints

  logic       clk = 1'b0;
  logic       rst_n;
  comp_rect_t comps          [NCOMP];
  logic       router_active  [NX][NY];
  coord_t     access_x       [NCOMP];
  coord_t     access_y       [NCOMP];
  logic       loc_in_valid   [NX][NY];
  logic       loc_in_ready   [NX][NY];
  flit_t      loc_in_flit    [NX][NY];
  logic       loc_out_valid  [NX][NY];
  logic       loc_out_ready  [NX][NY];
  flit_t      loc_out_flit   [NX][NY];
  logic       pin_n_in_valid [NX], pin_n_in_ready [NX], pin_n_out_valid[NX], pin_n_out_ready[NX];
  flit_t      pin_n_in_flit  [NX], pin_n_out_flit [NX];
  logic       pin_s_in_valid [NX], pin_s_in_ready [NX], pin_s_out_valid[NX], pin_s_out_ready[NX];
  flit_t      pin_s_in_flit  [NX], pin_s_out_flit [NX];
  logic       pin_e_in_valid [NY], pin_e_in_ready [NY], pin_e_out_valid[NY], pin_e_out_ready[NY];
  flit_t      pin_e_in_flit  [NY], pin_e_out_flit [NY];
  logic       pin_w_in_valid [NY], pin_w_in_ready [NY], pin_w_out_valid[NY], pin_w_out_ready[NY];
  flit_t      pin_w_in_flit  [NY], pin_w_out_flit [NY];

  dynoc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cycle);
    end
  endtask

  // ---------------------------------------------------------------- endpoints
  // Endpoint e: 0..NLOC-1 local port of router (e / NY + 1, e % NY + 1);
  // then north pins (x = 1..NX), south pins, east pins (y = 1..NY), west pins.
  function automatic void ep_coord(input int e, output int x, output int y);
    if (e < NLOC)                  begin x = e / NY + 1;            y = e % NY + 1; end
    else if (e < NLOC + NX)        begin x = e - NLOC + 1;          y = NY + 1;     end
    else if (e < NLOC + 2*NX)      begin x = e - NLOC - NX + 1;     y = 0;          end
    else if (e < NLOC + 2*NX + NY) begin x = NX + 1;                y = e - NLOC - 2*NX + 1; end
    else                           begin x = 0;                     y = e - NLOC - 2*NX - NY + 1; end
  endfunction

  logic  src_valid[NS];
  flit_t src_flit [NS];
  logic  src_ready[NS];
  logic  snk_valid[NS];
  flit_t snk_flit [NS];
  logic  snk_ready[NS];

  always_comb begin
    for (int x = 0; x < NX; x++)
      for (int y = 0; y < NY; y++) begin
        loc_in_valid[x][y]     = src_valid[x*NY + y];
        loc_in_flit[x][y]      = src_flit[x*NY + y];
        src_ready[x*NY + y]    = loc_in_ready[x][y];
        snk_valid[x*NY + y]    = loc_out_valid[x][y];
        snk_flit[x*NY + y]     = loc_out_flit[x][y];
        loc_out_ready[x][y]    = snk_ready[x*NY + y];
      end
    for (int x = 0; x < NX; x++) begin
      pin_n_in_valid[x] = src_valid[NLOC + x];      pin_n_in_flit[x] = src_flit[NLOC + x];
      src_ready[NLOC + x] = pin_n_in_ready[x];
      snk_valid[NLOC + x] = pin_n_out_valid[x];     snk_flit[NLOC + x] = pin_n_out_flit[x];
      pin_n_out_ready[x] = snk_ready[NLOC + x];
      pin_s_in_valid[x] = src_valid[NLOC+NX+x];     pin_s_in_flit[x] = src_flit[NLOC+NX+x];
      src_ready[NLOC+NX+x] = pin_s_in_ready[x];
      snk_valid[NLOC+NX+x] = pin_s_out_valid[x];    snk_flit[NLOC+NX+x] = pin_s_out_flit[x];
      pin_s_out_ready[x] = snk_ready[NLOC+NX+x];
    end
    for (int y = 0; y < NY; y++) begin
      pin_e_in_valid[y] = src_valid[NLOC+2*NX+y];   pin_e_in_flit[y] = src_flit[NLOC+2*NX+y];
      src_ready[NLOC+2*NX+y] = pin_e_in_ready[y];
      snk_valid[NLOC+2*NX+y] = pin_e_out_valid[y];  snk_flit[NLOC+2*NX+y] = pin_e_out_flit[y];
      pin_e_out_ready[y] = snk_ready[NLOC+2*NX+y];
      pin_w_in_valid[y] = src_valid[NLOC+2*NX+NY+y]; pin_w_in_flit[y] = src_flit[NLOC+2*NX+NY+y];
      src_ready[NLOC+2*NX+NY+y] = pin_w_in_ready[y];
      snk_valid[NLOC+2*NX+NY+y] = pin_w_out_valid[y]; snk_flit[NLOC+2*NX+NY+y] = pin_w_out_flit[y];
      pin_w_out_ready[y] = snk_ready[NLOC+2*NX+NY+y];
    end
  end

  // ---------------------------------------------------------------- scoreboard
  int     expect_ep[int unsigned];     // tag -> destination endpoint
  longint sent_at  [int unsigned];
  longint last_latency;
  int     n_sent = 0, n_recv = 0;
  int     n_pin_deliv = 0, n_loc_deliv = 0;
  int     seq = 0;
  bit     inject_on = 0;
  int     inject_pct = 10;
  int     stall_pct  = 0;
  bit     center_on  = 0;               // (2,2) may be a destination

  function automatic bit ep_allowed(int e);
    // the covered router's local port is not a destination while covered
    return !(e == (1*NY + 1) && !center_on);
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int e = 0; e < NS; e++) begin
        // delivery
        if (snk_valid[e] && snk_ready[e]) begin
          int unsigned tag;
          int dx, dy;
          tag = snk_flit[e].data;
          ep_coord(e, dx, dy);
          checks++;
          if (!expect_ep.exists(tag)) begin
            failures++;
            $display("FAIL: unknown/duplicate tag %h at endpoint %0d", tag, e);
          end else if (expect_ep[tag] != e) begin
            failures++;
            $display("FAIL: tag %h at endpoint %0d, wanted %0d", tag, e, expect_ep[tag]);
          end else begin
            checks++;
            if (snk_flit[e].dx != coord_t'(dx) || snk_flit[e].dy != coord_t'(dy) || snk_flit[e].stamp) begin
              failures++;
              $display("FAIL: header changed for tag %h", tag);
            end
            last_latency = cycle - sent_at[tag];
            expect_ep.delete(tag);
            sent_at.delete(tag);
            n_recv++;
            if (e < NLOC) n_loc_deliv++; else n_pin_deliv++;
          end
        end
        // injection
        if (src_valid[e] && src_ready[e]) src_valid[e] <= 1'b0;
        if ((!src_valid[e] || src_ready[e]) && inject_on && ep_allowed(e) &&
            ($urandom_range(99) < inject_pct)) begin
          int d, x, y;
          flit_t f;
          do d = $urandom_range(NS - 1); while (d == e || !ep_allowed(d));
          ep_coord(d, x, y);
          f.dx = coord_t'(x); f.dy = coord_t'(y); f.stamp = 1'b0;
          f.data = {8'(e), 24'(seq)};
          seq++;
          expect_ep[f.data] = d;
          sent_at[f.data] = cycle;
          src_valid[e] <= 1'b1;
          src_flit[e]  <= f;
          n_sent++;
        end
        snk_ready[e] <= ($urandom_range(99) >= stall_pct);
      end
    end
  end

  // ---------------------------------------------------------------- event counters
  int n_sh = 0, n_sv = 0, n_unstamp = 0, n_stall = 0, n_contention = 0;
  int n_deact = 0, n_react = 0;

  for (genvar gx = 0; gx < NX; gx++) begin : g_cx
    for (genvar gy = 0; gy < NY; gy++) begin : g_cy
      for (genvar gi = 0; gi < 5; gi++) begin : g_ci
        always @(posedge clk) if (rst_n) begin
          if (dut.g_x[gx].g_y[gy].u_router.pop[gi]) begin
            automatic port_e p  = dut.g_x[gx].g_y[gy].u_router.route_port[gi];
            automatic logic  so = dut.g_x[gx].g_y[gy].u_router.route_stamp[gi];
            automatic logic  si = dut.g_x[gx].g_y[gy].u_router.head_flit[gi].stamp;
            if (!si && so && (p == P_NORTH || p == P_SOUTH)) n_sh++;
            if (!si && so && (p == P_EAST  || p == P_WEST))  n_sv++;
            if (si && !so) n_unstamp++;
          end
          if (gi < 4 && dut.r_out_valid[gx][gy][gi] && !dut.r_out_ready[gx][gy][gi]) n_stall++;
          if ($countones(dut.g_x[gx].g_y[gy].u_router.req[gi]) > 1) n_contention++;
        end
      end
    end
  end

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (sent %0d received %0d)", n_sent, n_recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // send one packet from endpoint s to d on an idle network, return latency
  task automatic single(input int s, input int d, output longint lat);
    int x, y;
    int n_before;
    flit_t f;
    ep_coord(d, x, y);
    f.dx = coord_t'(x); f.dy = coord_t'(y); f.stamp = 1'b0;
    f.data = {8'hEE, 24'(seq)};
    seq++;
    n_before = n_recv;
    @(negedge clk);
    expect_ep[f.data] = d;
    sent_at[f.data] = cycle;           // accepted at the coming edge
    src_flit[s] = f;
    src_valid[s] = 1'b1;
    n_sent++;
    @(negedge clk);
    src_valid[s] = 1'b0;
    repeat (40) @(negedge clk);
    check(n_recv == n_before + 1, $sformatf("single packet %0d -> %0d delivered", s, d));
    lat = last_latency;
  endtask

  task automatic drain();
    int guard = 0;
    inject_on = 0;
    while ((expect_ep.size() != 0 || src_pending()) && guard < 20000) begin
      @(negedge clk);
      guard++;
    end
    check(expect_ep.size() == 0, $sformatf("network drained (%0d left)", expect_ep.size()));
  endtask

  function automatic bit src_pending();
    for (int e = 0; e < NS; e++) if (src_valid[e]) return 1;
    return 0;
  endfunction

  longint lat;

  initial begin
    rst_n = 1'b0;
    for (int c = 0; c < NCOMP; c++) comps[c] = '0;
    for (int e = 0; e < NS; e++) begin
      src_valid[e] = 1'b0; src_flit[e] = '0; snk_ready[e] = 1'b1;
    end
    // the prototype's obstacle: router (2,2) covered by a 1 x 1 component
    comps[0] = '{valid: 1'b1, x0: 4'd2, y0: 4'd2, w: 4'd1, h: 4'd1};
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    n_deact++;
    check(!router_active[1][1] && router_active[0][0] && router_active[2][2],
          "only (2,2) deactivated");
    check(access_x[0] == 3 && access_y[0] == 3, "component accesses via (3,3)");

    // ---- 1. latency on the idle network, two cycles per router
    // (1,1) -> (3,1): routers (1,1),(2,1),(3,1)
    single(0*NY + 0, 2*NY + 0, lat);
    check(lat == 6, $sformatf("latency (1,1)->(3,1) = %0d, want 6", lat));
    // (1,2) -> (3,2) round the covered router: (1,2),(1,3),(2,3),(3,3),(3,2)
    single(0*NY + 1, 2*NY + 1, lat);
    check(lat == 10, $sformatf("latency (1,2)->(3,2) round obstacle = %0d, want 10", lat));
    // (2,3) -> (2,1): vertical surround, (2,3),(1,3)|(3,3),(.,2),(.,1),(2,1)
    single(1*NY + 2, 1*NY + 0, lat);
    check(lat == 10, $sformatf("latency (2,3)->(2,1) round obstacle = %0d, want 10", lat));

    // ---- 2. random traffic round the covered router
    stall_pct = 20; inject_pct = 15; inject_on = 1;
    repeat (3000) @(negedge clk);
    drain();

    // ---- 3. component removed: (2,2) returns to its default state
    comps[0].valid = 1'b0;
    @(negedge clk);
    n_react++;
    check(router_active[1][1], "(2,2) reactivated");
    center_on = 1;
    inject_on = 1;
    repeat (2000) @(negedge clk);
    drain();

    // ---- 4. placed again
    comps[0].valid = 1'b1;
    center_on = 0;
    @(negedge clk);
    n_deact++;
    inject_on = 1;
    repeat (2000) @(negedge clk);
    drain();

    $display("sent %0d received %0d: SH %0d SV %0d unstamp %0d stall %0d contention %0d pin %0d local %0d",
             n_sent, n_recv, n_sh, n_sv, n_unstamp, n_stall, n_contention, n_pin_deliv, n_loc_deliv);
    check(n_sent == n_recv, "every packet delivered");
    check(n_sh > 0,         "SH-XY surround happened");
    check(n_sv > 0,         "SV-XY surround happened");
    check(n_unstamp > 0,    "stamp removed at a corner");
    check(n_stall > 0,      "link stall happened");
    check(n_contention > 0, "output contention happened");
    check(n_pin_deliv > 0,  "pin delivery happened");
    check(n_loc_deliv > 0,  "local delivery happened");
    check(n_deact == 2 && n_react == 1, "deactivation and reactivation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
