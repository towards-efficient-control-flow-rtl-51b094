// Testbench for benes_network: routes random full permutations of the
// 64x64 network with the looping algorithm and checks that every output
// carries the input it was routed from.  Also checks one broadcast setting
// of a single switch (both outputs taking the same input).
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_benes_network;
  import benes_route_pkg::*;
  localparam int N = 64;
  localparam int CW = N * 11;
  logic [5:0]    in_d  [N];
  logic [5:0]    out_d [N];
  logic [CW-1:0] cfg;
  int checks = 0, failures = 0;

  benes_network #(.N(N), .W(6)) dut (.in_d, .cfg, .out_d);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm[];
    perm = new[N];
    for (int i = 0; i < N; i++) in_d[i] = 6'(i);
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < N; i++) perm[i] = i;
      if (t > 0) perm.shuffle();
      route(N, perm, 0);
      for (int b = 0; b < CW; b++) cfg[b] = cfgbits[b];
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_d[perm[i]] !== 6'(i)) begin
          failures++;
          if (failures < 5) $display("perm %0d: out[%0d]=%0d expected %0d", t, perm[i], out_d[perm[i]], i);
        end
      end
    end
    // single switch broadcast: first input switch sends input 1 to both outputs,
    // rest straight. Then output 0 of the first sub-net path is input 1.
    for (int i = 0; i < N; i++) perm[i] = i;
    route(N, perm, 0);
    for (int b = 0; b < CW; b++) cfg[b] = cfgbits[b];
    cfg[0] = 1'b1;  // top output of switch 0 takes input 1
    #1;
    checks++;
    if (out_d[0] !== 6'd1 || out_d[1] !== 6'd1) begin
      failures++;
      $display("broadcast: out0=%0d out1=%0d", out_d[0], out_d[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
