// dynoc_router -- five-port DyNoC network element (router).
//
// Ports are north, east, south, west and local (numbered as port_e in
// dynoc_pkg). The local port connects the network client: a PE or the
// placed component whose access router this is (the router at the upper
// right corner of the component). Each input has an input_buffer; the head
// flit of each buffer is routed by sxy_route (S-XY with stamping, optionally
// router guiding); a round-robin arbiter per output picks one of the inputs
// that want it; the winner is copied, with its updated stamp, into that
// output's register.
//
// Deactivation: when `active` is 0 the router is covered by a placed
// component. It then accepts nothing, drives no output, and its buffers and
// output registers are emptied. The paper leaves what happens to packets
// caught in a router at the moment it is covered to future work ("clearing a
// region"); dropping them is this design's choice. nb_act[d] tells the
// router whether its neighbour in direction d is active; guide[d] is the
// guide line from a component on side d (see sxy_route). Edge directions
// (towards the pin ring) follow from X, Y, NX, NY.
//
// Links: valid/ready, one flit per cycle per port; out_flit is held while
// out_valid is 1 and out_ready is 0. Timing: a flit accepted at an input in
// cycle t can leave on an output register in cycle t+2, i.e. two cycles per
// hop without contention. Reset is synchronous, active low.
module dynoc_router
  import dynoc_pkg::*;
#(
  parameter int unsigned X          = 1,
  parameter int unsigned Y          = 1,
  parameter int unsigned NX         = 3,
  parameter int unsigned NY         = 3,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter bit          GUIDED     = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       active,
  input  logic [3:0] nb_act,
  input  logic [3:0] guide,
  input  logic       in_valid  [5],
  output logic       in_ready  [5],
  input  flit_t      in_flit   [5],
  output logic       out_valid [5],
  input  logic       out_ready [5],
  output flit_t      out_flit  [5]
);
  localparam logic [3:0] EDGE = {X == 1, Y == 1, X == NX, Y == NY}; // W,S,E,N

  logic  buf_ready [5];
  logic  head_valid[5];
  flit_t head_flit [5];
  logic  pop       [5];
  port_e route_port[5];
  logic  route_stamp[5];

  logic [4:0] req   [5];   // req[o][i]: input i wants output o
  logic [4:0] grant [5];   // grant[o][i]
  logic       can_load[5];

  for (genvar i = 0; i < 5; i++) begin : g_in
    input_buffer #(.DEPTH(FIFO_DEPTH)) u_buf (
      .clk       (clk),
      .rst_n     (rst_n),
      .flush     (!active),
      .push_valid(in_valid[i] && active),
      .push_ready(buf_ready[i]),
      .push_flit (in_flit[i]),
      .pop       (pop[i]),
      .head_valid(head_valid[i]),
      .head_flit (head_flit[i])
    );
    assign in_ready[i] = buf_ready[i] && active;

    sxy_route #(.GUIDED(GUIDED)) u_route (
      .my_x     (coord_t'(X)),
      .my_y     (coord_t'(Y)),
      .in_port  (port_e'(i)),
      .dest_x   (head_flit[i].dx),
      .dest_y   (head_flit[i].dy),
      .stamp    (head_flit[i].stamp),
      .nb_act   (nb_act),
      .edge_dir (EDGE),
      .guide    (guide),
      .out_port (route_port[i]),
      .out_stamp(route_stamp[i])
    );
  end

  always_comb begin
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++)
        req[o][i] = active && head_valid[i] && (route_port[i] == port_e'(o));
  end

  for (genvar o = 0; o < 5; o++) begin : g_out
    assign can_load[o] = !out_valid[o] || out_ready[o];

    rr_arbiter #(.N(5)) u_arb (
      .clk    (clk),
      .rst_n  (rst_n),
      .req    (req[o] & {5{can_load[o]}}),
      .advance(1'b1),
      .grant  (grant[o])
    );

    flit_t sel;
    always_comb begin
      sel = '0;
      for (int i = 0; i < 5; i++)
        if (grant[o][i]) begin
          sel       = head_flit[i];
          sel.stamp = route_stamp[i];
        end
    end

    always_ff @(posedge clk) begin
      if (!rst_n || !active) begin
        out_valid[o] <= 1'b0;
      end else if (can_load[o]) begin
        out_valid[o] <= |grant[o];
        if (|grant[o]) out_flit[o] <= sel;
      end
    end

    // A flit waiting for its receiver stays unchanged.
    a_hold: assert property (@(posedge clk) disable iff (!rst_n || !active)
                             out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]));
  end

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      pop[i] = 1'b0;
      for (int o = 0; o < 5; o++)
        if (grant[o][i]) pop[i] = 1'b1;
    end
  end
endmodule
