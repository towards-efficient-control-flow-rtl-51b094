// Testbench for data_mesh (4x4): every PE drives a distinct word; one cycle
// later each PE's N/E/S/W inputs must hold its neighbours' words, edge
// inputs must be empty, and nothing appears before the clock edge.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_data_mesh;
  import marionette_pkg::*;
  logic clk = 0, rst_n = 0;
  dword_t pe_out [16], pe_in [16][4];
  int checks = 0, failures = 0;

  data_mesh dut (.clk, .rst_n, .pe_out, .pe_in);
  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) pe_out[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < 16; i++) pe_out[i] = '{1'b1, 32'(t * 100 + i)};
      #1;
      checks++;
      if (pe_in[5][0].valid && pe_in[5][0].data == 32'(t * 100 + 1)) begin failures++; $display("FAIL early"); end
      @(negedge clk);
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
        automatic int me = r * 4 + c;
        automatic int nb[4] = '{(r > 0) ? me - 4 : -1, (c < 3) ? me + 1 : -1, (r < 3) ? me + 4 : -1, (c > 0) ? me - 1 : -1};
        for (int d = 0; d < 4; d++) begin
          checks++;
          if (nb[d] < 0) begin
            if (pe_in[me][d].valid) begin failures++; $display("FAIL edge %0d/%0d", me, d); end
          end else if (!(pe_in[me][d].valid && pe_in[me][d].data == 32'(t * 100 + nb[d]))) begin
            failures++; $display("FAIL pe %0d dir %0d = %0d", me, d, pe_in[me][d].data);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
