// Testbench for control_fifo: tokens pushed ahead are returned in order, one
// per pop request, one cycle after the request; simultaneous pushes on
// both ports keep A before B; a request on an empty FIFO is served when a
// token arrives; overflow is flagged.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_control_fifo;
  import marionette_pkg::*;
  logic clk = 0, rst_n = 0, overflow, ev_push, ev_pop;
  token_t push_a, push_b, pop, out;
  int checks = 0, failures = 0;
  int got[$];

  control_fifo #(.DEPTH(8)) dut (.clk, .rst_n, .push_a, .push_b, .pop, .out, .overflow, .ev_push, .ev_pop);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && out.valid) got.push_back(int'(out.addr));

  initial begin
    repeat (500) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chkq(input int exp[$], input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %p vs %p", what, got, exp); end
    got.delete();
  endtask

  initial begin
    push_a = '0; push_b = '0; pop = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    push_a = '{1, 3'd1}; @(negedge clk);
    push_a = '{1, 3'd2}; push_b = '{1, 3'd3}; @(negedge clk);
    push_a = '0; push_b = '{1, 3'd4}; @(negedge clk); push_b = '0;
    repeat (2) @(negedge clk);
    chkq('{}, "nothing without pop");
    pop = '{1, 3'd0}; @(negedge clk); pop = '0;
    #1 checks++; if (!(out.valid && out.addr == 1)) begin failures++; $display("FAIL pop latency"); end
    @(negedge clk);
    pop = '{1, 3'd0}; repeat (3) @(negedge clk); pop = '0;
    repeat (2) @(negedge clk);
    chkq('{1, 2, 3, 4}, "order");
    // request on empty FIFO, served later
    pop = '{1, 3'd0}; @(negedge clk); pop = '0;
    repeat (3) @(negedge clk);
    chkq('{}, "empty pop waits");
    push_a = '{1, 3'd6}; @(negedge clk); push_a = '0;
    repeat (2) @(negedge clk);
    chkq('{6}, "pending pop served");
    // overflow
    for (int i = 0; i < 9; i++) begin
      push_a = '{1, 3'(i)};
      #1 if (i == 8) begin checks++; if (!overflow) begin failures++; $display("FAIL overflow"); end end
      @(negedge clk);
    end
    push_a = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
