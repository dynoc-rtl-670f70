// tb_dynoc_color_app -- the color-generator application on the default
// 3 x 3 DyNoC.
//
// A VGA-controller model (VC) on the local port of router (1,1) sends the
// X and Y scan position of every pixel of a 640 x 480 frame (12 bits each)
// to a color-generator model (CG) on router (3,3); the CG answers each
// request with a 24-bit color, which the VC checks in scan order. Router
// (2,2) is covered by a 1 x 1 component, so the request path (1,1)->(3,3)
// and the reply path (3,3)->(1,1) are plain XY round the ring, while the
// remaining six routers exchange random background packets that cross the
// obstacle. The color function is a stand-in (the paper gives none):
// color = {x[7:0], y[7:0], x[7:0] ^ y[7:0]}.
//
// Rate check: the prototype drove a 25 MHz pixel clock from routers that
// run at 70-77 MHz, so the network must return at least one color every
// three router cycles on average; the test measures cycles per pixel over
// the frame and counts a failure above 3.
module tb_dynoc_color_app;
  import dynoc_pkg::*;

  localparam int NX = 3, NY = 3, NCOMP = 4;
  localparam int W = 640, H = 480;

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

  always_comb begin
    for (int x = 0; x < NX; x++) begin
      pin_n_in_valid[x] = 1'b0; pin_n_in_flit[x] = '0; pin_n_out_ready[x] = 1'b1;
      pin_s_in_valid[x] = 1'b0; pin_s_in_flit[x] = '0; pin_s_out_ready[x] = 1'b1;
    end
    for (int y = 0; y < NY; y++) begin
      pin_e_in_valid[y] = 1'b0; pin_e_in_flit[y] = '0; pin_e_out_ready[y] = 1'b1;
      pin_w_in_valid[y] = 1'b0; pin_w_in_flit[y] = '0; pin_w_out_ready[y] = 1'b1;
    end
  end

  function automatic logic [23:0] color_of(input logic [11:0] x, input logic [11:0] y);
    return {x[7:0], y[7:0], x[7:0] ^ y[7:0]};
  endfunction

  // router indices: VC at (1,1) = [0][0], CG at (3,3) = [2][2]
  function automatic bit is_app(int x, int y);
    return (x == 0 && y == 0) || (x == 2 && y == 2) || (x == 1 && y == 1);
  endfunction

  // ---------------------------------------------------------------- VC model
  int     req_px = 0, rsp_px = 0;
  bit     vc_run = 0;
  longint t_first, t_last;
  int     n_bad_color = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      loc_in_valid[0][0] <= 1'b0;
    end else begin
      if (loc_in_valid[0][0] && loc_in_ready[0][0]) begin
        loc_in_valid[0][0] <= 1'b0;
        req_px <= req_px + 1;
      end
      if (vc_run && (!loc_in_valid[0][0] || loc_in_ready[0][0]) &&
          (req_px + (loc_in_valid[0][0] ? 1 : 0)) < W * H) begin
        automatic int p = req_px + (loc_in_valid[0][0] ? 1 : 0);
        flit_t f;
        f.dx = 4'd3; f.dy = 4'd3; f.stamp = 1'b0;
        f.data = {8'h00, 12'(p % W), 12'(p / W)};
        loc_in_flit[0][0]  <= f;
        loc_in_valid[0][0] <= 1'b1;
      end
    end
  end

  assign loc_out_ready[0][0] = 1'b1;
  always @(posedge clk) begin
    if (rst_n && loc_out_valid[0][0]) begin
      automatic logic [11:0] ex = 12'(rsp_px % W);
      automatic logic [11:0] ey = 12'(rsp_px / W);
      if (rsp_px == 0) t_first <= cycle;
      t_last <= cycle;
      if (loc_out_flit[0][0].data != {8'h00, color_of(ex, ey)}) n_bad_color <= n_bad_color + 1;
      rsp_px <= rsp_px + 1;
    end
  end

  // ---------------------------------------------------------------- CG model
  // one-entry answer register: takes a request when its reply has left
  logic  cg_full;
  flit_t cg_reply;
  assign loc_out_ready[2][2] = !cg_full || loc_in_ready[2][2];
  always @(posedge clk) begin
    if (!rst_n) begin
      cg_full <= 1'b0;
    end else begin
      if (cg_full && loc_in_ready[2][2]) cg_full <= 1'b0;
      if (loc_out_valid[2][2] && loc_out_ready[2][2]) begin
        automatic flit_t q = loc_out_flit[2][2];
        cg_reply.dx    <= 4'd1;
        cg_reply.dy    <= 4'd1;
        cg_reply.stamp <= 1'b0;
        cg_reply.data  <= {8'h00, color_of(q.data[23:12], q.data[11:0])};
        cg_full        <= 1'b1;
      end
    end
  end
  assign loc_in_valid[2][2] = cg_full;
  assign loc_in_flit[2][2]  = cg_reply;

  // ---------------------------------------------------------------- background
  int bg_sent = 0, bg_recv = 0;
  bit bg_on = 0;
  int bg_pct = 5;          // background injection, percent per router per cycle
  for (genvar gx = 0; gx < NX; gx++) begin : g_bx
    for (genvar gy = 0; gy < NY; gy++) begin : g_by
      if (!((gx == 0 && gy == 0) || (gx == 2 && gy == 2))) begin : g_bg
        always @(posedge clk) begin
          if (!rst_n) begin
            loc_in_valid[gx][gy] <= 1'b0;
            loc_in_flit[gx][gy]  <= '0;
          end else begin
            if (loc_in_valid[gx][gy] && loc_in_ready[gx][gy]) loc_in_valid[gx][gy] <= 1'b0;
            if ((!loc_in_valid[gx][gy] || loc_in_ready[gx][gy]) && bg_on && router_active[gx][gy] &&
                $urandom_range(99) < bg_pct) begin
              int dx, dy;
              flit_t f;
              do begin
                dx = $urandom_range(NX - 1); dy = $urandom_range(NY - 1);
              end while (is_app(dx, dy) || (dx == gx && dy == gy));
              f.dx = coord_t'(dx + 1); f.dy = coord_t'(dy + 1); f.stamp = 1'b0;
              f.data = {8'hBB, 8'(gx), 8'(gy), 8'h00};
              loc_in_flit[gx][gy]  <= f;
              loc_in_valid[gx][gy] <= 1'b1;
              bg_sent++;
            end
          end
        end
        assign loc_out_ready[gx][gy] = 1'b1;
        always @(posedge clk)
          if (rst_n && loc_out_valid[gx][gy]) begin
            bg_recv++;
            checks++;
            if (loc_out_flit[gx][gy].data[31:24] != 8'hBB ||
                loc_out_flit[gx][gy].dx != coord_t'(gx + 1) || loc_out_flit[gx][gy].dy != coord_t'(gy + 1)) begin
              failures++;
              $display("FAIL: background packet misdelivered at (%0d,%0d)", gx + 1, gy + 1);
            end
          end
      end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (pixels %0d)", rsp_px);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    for (int c = 0; c < NCOMP; c++) comps[c] = '0;
    comps[0] = '{valid: 1'b1, x0: 4'd2, y0: 4'd2, w: 4'd1, h: 4'd1};
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    bg_on = 1;
    repeat (50) @(posedge clk);
    vc_run = 1;
    wait (rsp_px == W * H);
    repeat (20) @(posedge clk);
    bg_on = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (n_bad_color != 0) begin
      failures++;
      $display("FAIL: %0d pixels with a wrong color", n_bad_color);
    end
    checks++;
    if (rsp_px != W * H) begin failures++; $display("FAIL: pixel count %0d", rsp_px); end
    checks++;
    if (bg_recv != bg_sent || bg_sent == 0) begin
      failures++;
      $display("FAIL: background sent %0d received %0d", bg_sent, bg_recv);
    end
    begin
      real cpp;
      cpp = real'(t_last - t_first) / real'(W * H - 1);
      $display("frame: %0d pixels, %0.3f router cycles per pixel, %0d background packets",
               rsp_px, cpp, bg_recv);
      checks++;
      if (cpp > 3.0) begin failures++; $display("FAIL: too slow for 25 MHz pixels at 77 MHz"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
