// Testbench for cf_scheduler: fall-through of a token into an empty queue,
// priority between the two inputs, holding tokens while the trigger is not
// ready, and order within one queue.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_cf_scheduler;
  import marionette_pkg::*;
  logic clk = 0, rst_n = 0, prio, out_ready, overflow;
  token_t in_tok [2], out_tok;
  int checks = 0, failures = 0;

  cf_scheduler dut (.clk, .rst_n, .in_tok, .prio, .out_tok, .out_ready, .overflow);
  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_tok(input logic v, input int a, input string what);
    checks++;
    if (out_tok.valid !== v || (v && out_tok.addr !== ADDR_W'(a))) begin
      failures++;
      $display("%s: got v=%0d a=%0d, expected v=%0d a=%0d", what, out_tok.valid, out_tok.addr, v, a);
    end
  endtask

  initial begin
    in_tok[0] = '0; in_tok[1] = '0; prio = 0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // fall-through
    in_tok[0] = '{1'b1, 3'd5}; out_ready = 1;
    #1 expect_tok(1, 5, "fallthrough");
    @(negedge clk); in_tok[0] = '0;
    #1 expect_tok(0, 0, "consumed");
    // both ports at once, trigger busy
    out_ready = 0;
    in_tok[0] = '{1'b1, 3'd1}; in_tok[1] = '{1'b1, 3'd2};
    @(negedge clk); in_tok[0] = '{1'b1, 3'd3}; in_tok[1] = '0;
    @(negedge clk); in_tok[0] = '0;
    prio = 1;
    #1 expect_tok(1, 2, "prio port1");
    prio = 0;
    #1 expect_tok(1, 1, "prio port0");
    out_ready = 1;
    @(negedge clk); #1 expect_tok(1, 3, "fifo order");
    @(negedge clk); #1 expect_tok(1, 2, "other port after");
    @(negedge clk); #1 expect_tok(0, 0, "empty");
    checks++; if (overflow) failures++;
    // overflow: 5 tokens into a 4-deep queue while not ready
    out_ready = 0;
    for (int i = 0; i < 5; i++) begin
      in_tok[0] = '{1'b1, 3'(i)};
      #1 if (i == 4) begin checks++; if (!overflow) begin failures++; $display("no overflow"); end end
      @(negedge clk);
    end
    in_tok[0] = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
