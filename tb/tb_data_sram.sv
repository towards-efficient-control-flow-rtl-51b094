// Testbench for data_sram: writes a pattern into every bank at random
// addresses, reads it back with the one-cycle latency, and checks that
// banks are independent (all four accessed in the same cycle).
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_data_sram;
  import marionette_pkg::*;
  localparam int NB = NBANKS, BAW = DMEM_AW - 2;
  logic clk = 0;
  logic [NB-1:0] req, we;
  logic [BAW-1:0] addr [NB];
  logic [31:0] wdata [NB], rdata [NB];
  int checks = 0, failures = 0;

  data_sram dut (.clk, .req, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] pat(int b, int a); return 32'(b * 32'h01000193 + a * 7 + 1); endfunction

  initial begin
    logic [BAW-1:0] as [32];
    for (int k = 0; k < 32; k++) as[k] = BAW'($urandom);
    req = '0; we = '0;
    @(negedge clk);
    for (int k = 0; k < 32; k++) begin
      req = '1; we = '1;
      for (int b = 0; b < NB; b++) begin addr[b] = as[k] ^ BAW'(b); wdata[b] = pat(b, int'(as[k] ^ BAW'(b))); end
      @(negedge clk);
    end
    for (int k = 0; k < 32; k++) begin
      req = '1; we = '0;
      for (int b = 0; b < NB; b++) addr[b] = as[k] ^ BAW'(b);
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b] !== pat(b, int'(as[k] ^ BAW'(b)))) begin
          failures++; if (failures < 5) $display("FAIL bank %0d addr %0d: %h", b, as[k] ^ BAW'(b), rdata[b]);
        end
      end
    end
    // read data holds when not requested
    req = '0; @(negedge clk);
    checks++; if (rdata[0] !== pat(0, int'(as[31]))) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
