// rr_arbiter -- round-robin arbiter, one grant per cycle.
//
// Grants the first requester at or after the rotating priority pointer.
// When `advance` is 1 in a cycle that has a grant, the pointer moves to the
// requester after the granted one, so every requester is served within N
// grants. Combinational from req to grant; the pointer is a register
// (synchronous active-low reset to requester 0). Helper of dynoc_router; the
// arbitration policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;

  logic [PW-1:0] ptr;
  logic [PW-1:0] gidx;
  logic          any;

  always_comb begin
    grant = '0;
    gidx  = '0;
    any   = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [PW-1:0] idx;
      idx = PW'((int'(ptr) + k) % N);
      if (!any && req[idx]) begin
        any         = 1'b1;
        gidx        = idx;
        grant[idx]  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      ptr <= '0;
    else if (advance && any)
      ptr <= (gidx == PW'(N - 1)) ? '0 : gidx + 1'b1;
  end
endmodule
