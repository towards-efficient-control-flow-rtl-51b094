// Testbench for control_network: a 64x64 Benes routing plus a broadcast in
// CS network 0 (line 0 spread over lines 0..7).  Tokens sent in one cycle
// must appear at the routed outputs in the next cycle (one-cycle latency),
// and nowhere else.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_control_network;
  import marionette_pkg::*;
  import benes_route_pkg::*;
  localparam int N = CNET_N;
  logic clk = 0, rst_n = 0;
  logic [NET_CFG_W-1:0] cfg;
  token_t in_tok [N], out_tok [N];
  int checks = 0, failures = 0;

  control_network dut (.clk, .rst_n, .cfg, .in_tok, .out_tok);
  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int map[];
    int expv[N];
    map = new[N];
    for (int i = 0; i < N; i++) in_tok[i] = '0;
    for (int round = 0; round < 10; round++) begin
      // random full permutation
      for (int i = 0; i < N; i++) map[i] = i;
      map.shuffle();
      route(N, map, 0);
      cfg = '0;
      for (int b = 0; b < BENES_CFG_W; b++) cfg[b] = cfgbits[b];
      if (round == 0) begin
        // CS0: line 0 -> lines 0..7
        cfg[BENES_CFG_W + 0*CS_N + 1] = 1'b1;
        cfg[BENES_CFG_W + 1*CS_N + 2] = 1'b1; cfg[BENES_CFG_W + 1*CS_N + 3] = 1'b1;
        for (int i = 4; i < 8; i++) cfg[BENES_CFG_W + 2*CS_N + i] = 1'b1;
      end
      rst_n = 1;
      @(negedge clk);
      for (int i = 0; i < N; i++) in_tok[i] = '{(i % 3) != 0, ADDR_W'(i)};
      for (int i = 0; i < N; i++) begin
        automatic int src = (round == 0 && i < 8) ? 0 : i;
        expv[map[i]] = (in_tok[src].valid) ? (8 | int'(in_tok[src].addr)) : 0;
      end
      #1;
      checks++;
      if (out_tok[map[5]].valid && out_tok[map[5]] == '{1'b1, 3'd5} && round > 0) begin
        failures++; $display("FAIL: output changed before clock");
      end
      @(negedge clk);
      for (int i = 0; i < N; i++) in_tok[i] = '0;
      for (int o = 0; o < N; o++) begin
        int g;
        g = out_tok[o].valid ? (8 | int'(out_tok[o].addr)) : 0;
        checks++;
        if (g != expv[o]) begin
          failures++;
          if (failures < 6) $display("FAIL round %0d out %0d: %0h exp %0h", round, o, g, expv[o]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_tok[map[1]].valid) begin failures++; $display("FAIL token stayed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
