// input_buffer -- packet FIFO at one router input port.
//
// Each router port buffers incoming flits in a small first-in first-out
// store; the paper reports memory use of its routers but not the buffer
// organisation, so depth and handshake are this design's choice. The store
// is a register array with read and write pointers and an occupancy count.
//
// Interface: the upstream side sees a valid/ready link (a flit is taken in a
// cycle where push_valid and push_ready are both 1). push_ready depends only
// on the registered count (not on pop), so no combinational path runs from
// the downstream router back to the upstream one. The head flit is visible
// on head_flit whenever head_valid is 1; pop removes it at the clock edge.
// flush empties the buffer (used when the router is deactivated by a placed
// component). Timing: a flit pushed in cycle t is at the head in cycle t+1.
// Reset is synchronous, active low.
module input_buffer
  import dynoc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  flush,
  input  logic  push_valid,
  output logic  push_ready,
  input  flit_t push_flit,
  input  logic  pop,
  output logic  head_valid,
  output flit_t head_flit
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t             mem [DEPTH];
  logic [AW-1:0]     rd_ptr, wr_ptr;
  logic [AW:0]       count;

  logic do_push, do_pop;

  assign push_ready = (count < (AW+1)'(DEPTH));
  assign head_valid = (count != '0);
  assign head_flit  = mem[rd_ptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop && head_valid;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Storage has no reset: only entries below the count are ever read.
  always_ff @(posedge clk) begin
    if (do_push && !flush) mem[wr_ptr] <= push_flit;
  end

  // A pop is only issued for a flit that is present.
  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                        pop |-> head_valid);
endmodule
