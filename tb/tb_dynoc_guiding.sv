// tb_dynoc_guiding -- S-XY routing round large components, with and without
// router guiding.
//
// Two 5 x 5 meshes run side by side, one with fixed surround directions
// (GUIDED = 0) and one with router guiding (GUIDED = 1); both get the same
// placements and the same packets on their local ports (pins idle).
//
// Phase 1, one 3 x 3 component covering x = 2..4, y = 2..4, idle network:
//   (2,1) -> (2,5): without guiding the packet turns east at (2,1), goes
//   round the east side and back west along the top row: 11 routers,
//   22 cycles. With guiding the bottom-side router (2,1) is told "west"
//   (nearer corner) and the packet goes round the west side: 7 routers,
//   14 cycles.
//   (4,1) -> (4,5): without guiding east, 7 routers (14 cycles); with
//   guiding (4,1) is told "east": also 7 routers.
// Phase 2, same component, random traffic between all active routers.
// Phase 3, two 3 x 1 components stacked at y = 2 and 4 (the kind of layout
//   that gives long paths), random traffic.
// Every packet must arrive once, unchanged, at its destination.
module tb_dynoc_guiding;
  import dynoc_pkg::*;

  localparam int NX = 5, NY = 5, NCOMP = 2;
  localparam int NLOC = NX * NY;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  comp_rect_t comps [NCOMP];

  // endpoint e = local port of router (e / NY + 1, e % NY + 1)
  logic  src_valid[2][NLOC];
  flit_t src_flit [2][NLOC];
  logic  src_ready[2][NLOC];
  logic  snk_valid[2][NLOC];
  flit_t snk_flit [2][NLOC];
  logic  snk_ready[NLOC];
  logic  act      [2][NX][NY];

  int     expect_ep[2][int unsigned];
  longint sent_at  [2][int unsigned];
  longint last_lat [2];
  int     n_sent[2] = '{0, 0};
  int     n_recv[2] = '{0, 0};
  longint lat_sum[2] = '{0, 0};

  for (genvar g = 0; g < 2; g++) begin : g_net
    logic  li_v[NX][NY], li_r[NX][NY], lo_v[NX][NY], lo_r[NX][NY];
    flit_t li_f[NX][NY], lo_f[NX][NY];
    logic  pnv[NX], pnr[NX], pnov[NX], pnor[NX], psv[NX], psr[NX], psov[NX], psor[NX];
    flit_t pnf[NX], pnof[NX], psf[NX], psof[NX];
    logic  pev[NY], per[NY], peov[NY], peor[NY], pwv[NY], pwr[NY], pwov[NY], pwor[NY];
    flit_t pef[NY], peof[NY], pwf[NY], pwof[NY];
    coord_t ax[NCOMP], ay[NCOMP];

    always_comb begin
      for (int x = 0; x < NX; x++) begin
        pnv[x] = 1'b0; pnf[x] = '0; pnor[x] = 1'b1;
        psv[x] = 1'b0; psf[x] = '0; psor[x] = 1'b1;
      end
      for (int y = 0; y < NY; y++) begin
        pev[y] = 1'b0; pef[y] = '0; peor[y] = 1'b1;
        pwv[y] = 1'b0; pwf[y] = '0; pwor[y] = 1'b1;
      end
      for (int x = 0; x < NX; x++)
        for (int y = 0; y < NY; y++) begin
          li_v[x][y] = src_valid[g][x*NY + y];
          li_f[x][y] = src_flit[g][x*NY + y];
          src_ready[g][x*NY + y] = li_r[x][y];
          snk_valid[g][x*NY + y] = lo_v[x][y];
          snk_flit[g][x*NY + y]  = lo_f[x][y];
          lo_r[x][y] = snk_ready[x*NY + y];
        end
    end

    dynoc_top #(.NX(NX), .NY(NY), .NCOMP(NCOMP), .FIFO_DEPTH(4), .GUIDED(g == 1)) u_noc (
      .clk, .rst_n, .comps, .router_active(act[g]), .access_x(ax), .access_y(ay),
      .loc_in_valid(li_v), .loc_in_ready(li_r), .loc_in_flit(li_f),
      .loc_out_valid(lo_v), .loc_out_ready(lo_r), .loc_out_flit(lo_f),
      .pin_n_in_valid(pnv), .pin_n_in_ready(pnr), .pin_n_in_flit(pnf),
      .pin_n_out_valid(pnov), .pin_n_out_ready(pnor), .pin_n_out_flit(pnof),
      .pin_s_in_valid(psv), .pin_s_in_ready(psr), .pin_s_in_flit(psf),
      .pin_s_out_valid(psov), .pin_s_out_ready(psor), .pin_s_out_flit(psof),
      .pin_e_in_valid(pev), .pin_e_in_ready(per), .pin_e_in_flit(pef),
      .pin_e_out_valid(peov), .pin_e_out_ready(peor), .pin_e_out_flit(peof),
      .pin_w_in_valid(pwv), .pin_w_in_ready(pwr), .pin_w_in_flit(pwf),
      .pin_w_out_valid(pwov), .pin_w_out_ready(pwor), .pin_w_out_flit(pwof)
    );

    // nothing may leave on a pin: all traffic is local to local
    always @(posedge clk) if (rst_n) begin
      for (int x = 0; x < NX; x++)
        if (pnov[x] || psov[x]) begin failures++; $display("FAIL: net %0d pin output", g); end
      for (int y = 0; y < NY; y++)
        if (peov[y] || pwov[y]) begin failures++; $display("FAIL: net %0d pin output", g); end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cycle);
    end
  endtask

  bit inject_on = 0;
  int inject_pct = 5;
  int seq = 0;

  function automatic bit ep_active(int e);
    return act[0][e / NY][e % NY];
  endfunction

  // receive on both networks; inject the same packet into both
  always @(posedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < 2; g++)
        for (int e = 0; e < NLOC; e++) begin
          if (snk_valid[g][e] && snk_ready[e]) begin
            int unsigned tag;
            tag = snk_flit[g][e].data;
            checks++;
            if (!expect_ep[g].exists(tag) || expect_ep[g][tag] != e ||
                snk_flit[g][e].dx != coord_t'(e / NY + 1) || snk_flit[g][e].dy != coord_t'(e % NY + 1)) begin
              failures++;
              $display("FAIL: net %0d tag %h misdelivered at %0d", g, tag, e);
            end else begin
              last_lat[g] = cycle - sent_at[g][tag];
              lat_sum[g] += last_lat[g];
              expect_ep[g].delete(tag);
              sent_at[g].delete(tag);
              n_recv[g]++;
            end
          end
          if (src_valid[g][e] && src_ready[g][e]) src_valid[g][e] <= 1'b0;
        end
      for (int e = 0; e < NLOC; e++) begin
        if (!src_valid[0][e] && !src_valid[1][e] && inject_on && ep_active(e) &&
            $urandom_range(99) < inject_pct) begin
          int d;
          flit_t f;
          do d = $urandom_range(NLOC - 1); while (d == e || !ep_active(d));
          f.dx = coord_t'(d / NY + 1); f.dy = coord_t'(d % NY + 1); f.stamp = 1'b0;
          f.data = {8'(e), 24'(seq)};
          seq++;
          for (int g = 0; g < 2; g++) begin
            expect_ep[g][f.data] = d;
            sent_at[g][f.data] = cycle;
            src_valid[g][e] <= 1'b1;
            src_flit[g][e]  <= f;
            n_sent[g]++;
          end
        end
        snk_ready[e] <= ($urandom_range(99) >= 10);
      end
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ep(int x, int y);
    return (x - 1) * NY + (y - 1);
  endfunction

  task automatic single(input int s, input int d);
    flit_t f;
    f.dx = coord_t'(d / NY + 1); f.dy = coord_t'(d % NY + 1); f.stamp = 1'b0;
    f.data = {8'hEE, 24'(seq)};
    seq++;
    @(negedge clk);
    for (int g = 0; g < 2; g++) begin
      expect_ep[g][f.data] = d;
      sent_at[g][f.data] = cycle;
      src_flit[g][s] = f;
      src_valid[g][s] = 1'b1;
      n_sent[g]++;
    end
    repeat (60) @(negedge clk);
    check(expect_ep[0].size() == 0 && expect_ep[1].size() == 0, "single packet delivered");
  endtask

  task automatic drain();
    int guard = 0;
    inject_on = 0;
    while ((expect_ep[0].size() != 0 || expect_ep[1].size() != 0) && guard < 40000) begin
      @(negedge clk);
      guard++;
    end
    check(expect_ep[0].size() == 0, $sformatf("plain net drained (%0d left)", expect_ep[0].size()));
    check(expect_ep[1].size() == 0, $sformatf("guided net drained (%0d left)", expect_ep[1].size()));
  endtask

  initial begin
    rst_n = 1'b0;
    for (int c = 0; c < NCOMP; c++) comps[c] = '0;
    for (int g = 0; g < 2; g++)
      for (int e = 0; e < NLOC; e++) begin src_valid[g][e] = 1'b0; src_flit[g][e] = '0; end
    for (int e = 0; e < NLOC; e++) snk_ready[e] = 1'b1;
    comps[0] = '{valid: 1'b1, x0: 4'd2, y0: 4'd2, w: 4'd3, h: 4'd3};
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- phase 1: path lengths round one component
    single(ep(2, 1), ep(2, 5));
    check(last_lat[0] == 22, $sformatf("plain (2,1)->(2,5) latency %0d, want 22", last_lat[0]));
    check(last_lat[1] == 14, $sformatf("guided (2,1)->(2,5) latency %0d, want 14", last_lat[1]));
    single(ep(4, 1), ep(4, 5));
    check(last_lat[0] == 14, $sformatf("plain (4,1)->(4,5) latency %0d, want 14", last_lat[0]));
    check(last_lat[1] == 14, $sformatf("guided (4,1)->(4,5) latency %0d, want 14", last_lat[1]));

    // ---- phase 2: random traffic round it
    lat_sum = '{0, 0};
    inject_on = 1;
    repeat (4000) @(negedge clk);
    drain();
    $display("one component: %0d packets, mean latency plain %0d guided %0d",
             n_recv[1], lat_sum[0] / (n_recv[0] > 0 ? n_recv[0] : 1),
             lat_sum[1] / (n_recv[1] > 0 ? n_recv[1] : 1));

    // ---- phase 3: stacked components
    comps[0] = '{valid: 1'b1, x0: 4'd2, y0: 4'd2, w: 4'd3, h: 4'd1};
    comps[1] = '{valid: 1'b1, x0: 4'd2, y0: 4'd4, w: 4'd3, h: 4'd1};
    @(negedge clk);
    single(ep(2, 1), ep(2, 5));
    $display("stacked (2,1)->(2,5): latency plain %0d guided %0d", last_lat[0], last_lat[1]);
    inject_on = 1;
    repeat (4000) @(negedge clk);
    drain();

    check(n_sent[0] == n_recv[0] && n_sent[1] == n_recv[1], "every packet delivered");
    check(n_recv[0] > 500, "traffic ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
