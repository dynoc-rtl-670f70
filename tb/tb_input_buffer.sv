// tb_input_buffer -- self-checking test of the router input FIFO.
//
// Drives random pushes and pops against a queue reference model, checks the
// head flit, head_valid and push_ready every cycle, checks that exactly DEPTH
// flits fit, that a pushed flit is at the head one cycle later, and that
// flush empties the buffer.
module tb_input_buffer;
  import dynoc_pkg::*;

  localparam int DEPTH = 4;

  logic  clk = 1'b0;
  logic  rst_n;
  logic  flush;
  logic  push_valid;
  logic  push_ready;
  flit_t push_flit;
  logic  pop;
  logic  head_valid;
  flit_t head_flit;

  int checks = 0;
  int failures = 0;
  flit_t model[$];

  input_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic flit_t rand_flit();
    flit_t f;
    f.dx    = coord_t'($urandom);
    f.dy    = coord_t'($urandom);
    f.stamp = 1'($urandom);
    f.data  = $urandom;
    return f;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; flush = 1'b0; push_valid = 1'b0; pop = 1'b0; push_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!head_valid && push_ready, "empty after reset");

    // fill: exactly DEPTH entries fit
    for (int i = 0; i < DEPTH + 2; i++) begin
      push_flit = rand_flit();
      push_valid = 1'b1;
      if (push_ready) model.push_back(push_flit);
      @(posedge clk); #1;
      if (i == 0) check(head_valid && head_flit == model[0], "head one cycle after push");
    end
    push_valid = 1'b0;
    check(model.size() == DEPTH, "DEPTH flits accepted");
    check(!push_ready, "full: push_ready low");
    // drain in order
    while (model.size() > 0) begin
      check(head_valid && head_flit == model[0], "drain order");
      pop = 1'b1;
      void'(model.pop_front());
      @(posedge clk); #1;
    end
    pop = 1'b0;
    check(!head_valid, "empty after drain");

    // random traffic
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      check(head_valid == (model.size() != 0), "head_valid matches model");
      check(push_ready == (model.size() < DEPTH), "push_ready matches model");
      if (model.size() != 0) check(head_flit == model[0], "head flit matches model");
      push_valid = 1'($urandom);
      push_flit  = rand_flit();
      pop        = head_valid && 1'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_flit);
      #1;
    end
    // flush
    @(negedge clk);
    push_valid = 1'b0; pop = 1'b0;
    flush = 1'b1;
    @(posedge clk); #1;
    flush = 1'b0;
    model.delete();
    check(!head_valid && push_ready, "flush empties");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
