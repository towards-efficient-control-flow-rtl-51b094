// Testbench for inst_memory: fills all 256 words, reads them back in a
// shuffled order with one-cycle latency.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_inst_memory;
  logic clk = 0, we, re;
  logic [7:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  int checks = 0, failures = 0;

  inst_memory dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [63:0] pat(int a); return {32'(a * 977), 32'(~a)}; endfunction

  initial begin
    int order[256];
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < 256; a++) begin we = 1; waddr = 8'(a); wdata = pat(a); order[a] = a; @(negedge clk); end
    we = 0;
    order.shuffle();
    for (int k = 0; k < 256; k++) begin
      re = 1; raddr = 8'(order[k]);
      @(negedge clk);
      checks++;
      if (rdata !== pat(order[k])) begin failures++; if (failures < 5) $display("FAIL %0d", order[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
