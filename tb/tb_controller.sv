// Testbench for controller with a behavioural instruction memory: after
// start it must write every instruction buffer word to the right PE and
// entry, assemble the network configuration from its words, send the two
// start tokens once, ignore tokens that are not the done address, and
// finish on the done token.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_controller;
  import marionette_pkg::*;
  localparam int NETW = (NET_CFG_W + 63) / 64;
  logic clk = 0, rst_n = 0, start, busy, done, imem_re;
  logic [31:0] run_cycles;
  logic [IMEM_AW-1:0] imem_raddr;
  logic [63:0] imem_rdata, mem [256];
  logic [15:0] ib_we;
  logic [ADDR_W-1:0] ib_waddr;
  inst_t ib_wdata;
  logic [NET_CFG_W-1:0] net_cfg;
  token_t ctrl_out [2], ctrl_in [2];
  int checks = 0, failures = 0, n_ib = 0, ib_bad = 0, n_start = 0;

  controller dut (.clk, .rst_n, .start, .busy, .done, .run_cycles, .imem_re, .imem_raddr, .imem_rdata,
                  .ib_we, .ib_waddr, .ib_wdata, .net_cfg, .ctrl_out, .ctrl_in);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (imem_re) imem_rdata <= mem[imem_raddr];

  always @(posedge clk) begin
    if (ib_we != 0) begin
      n_ib++;
      if (!$onehot(ib_we)) ib_bad++;
      for (int p = 0; p < 16; p++)
        if (ib_we[p] && 64'(ib_wdata) != mem[p * 8 + int'(ib_waddr)]) ib_bad++;
    end
    if (ctrl_out[0].valid || ctrl_out[1].valid) begin
      n_start++;
      if (!(ctrl_out[0] == '{1'b1, 3'd2} && ctrl_out[1] == '{1'b1, 3'd5})) ib_bad++;
    end
  end

  initial begin
    repeat (3000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NETW*64-1:0] expcfg;
    for (int a = 0; a < 256; a++) mem[a] = {$urandom, $urandom};
    mem[128 + NETW] = 64'hDA;   // port0: valid, addr 2; port1: valid, addr 5
    for (int w = 0; w < NETW; w++) expcfg[w*64 +: 64] = mem[128 + w];
    start = 0; ctrl_in[0] = '0; ctrl_in[1] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (busy || done) failures++;
    start = 1; @(negedge clk); start = 0;
    wait (n_start == 1);
    @(negedge clk);
    checks++; if (n_ib != 128 || ib_bad != 0) begin failures++; $display("FAIL ib writes %0d bad %0d", n_ib, ib_bad); end
    checks++; if (net_cfg != expcfg[NET_CFG_W-1:0]) begin failures++; $display("FAIL net cfg"); end
    checks++; if (!busy || done) begin failures++; $display("FAIL busy"); end
    repeat (5) @(negedge clk);
    ctrl_in[0] = '{1'b1, 3'd3}; @(negedge clk); ctrl_in[0] = '0;
    checks++; if (done) begin failures++; $display("FAIL done on wrong token"); end
    repeat (3) @(negedge clk);
    ctrl_in[1] = '{1'b1, DONE_ADDR}; @(negedge clk); ctrl_in[1] = '0;
    checks++; if (!done || busy) begin failures++; $display("FAIL no done"); end
    checks++; if (run_cycles != 10) begin failures++; $display("FAIL run_cycles %0d", run_cycles); end
    checks++; if (n_start != 1) begin failures++; $display("FAIL start tokens %0d", n_start); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
