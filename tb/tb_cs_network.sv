// Testbench for cs_network (16x16): random stage settings are compared with
// a stage-by-stage reference computed here, and the broadcast of one line
// over eight consecutive lines (spans 1, 2, 4) is checked explicitly.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_cs_network;
  localparam int N = 16, S = 4;
  logic [4:0]     in_d [N], out_d [N];
  logic [S*N-1:0] cfg;
  int checks = 0, failures = 0;

  cs_network #(.N(N), .W(5)) dut (.in_d, .cfg, .out_d);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [4:0] ref_v [N], nxt [N];
    for (int i = 0; i < N; i++) in_d[i] = 5'(i + 3);
    // broadcast line 0 to lines 0..7
    cfg = '0;
    cfg[0*N + 1] = 1'b1;
    cfg[1*N + 2] = 1'b1; cfg[1*N + 3] = 1'b1;
    for (int i = 4; i < 8; i++) cfg[2*N + i] = 1'b1;
    #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (out_d[i] !== ((i < 8) ? 5'd3 : 5'(i + 3))) begin
        failures++; $display("bcast line %0d = %0d", i, out_d[i]);
      end
    end
    for (int t = 0; t < 200; t++) begin
      cfg = {$urandom, $urandom};
      for (int i = 0; i < N; i++) in_d[i] = 5'($urandom);
      #1;
      for (int i = 0; i < N; i++) ref_v[i] = in_d[i];
      for (int s = 0; s < S; s++) begin
        for (int i = 0; i < N; i++)
          nxt[i] = (i >= (1 << s) && cfg[s*N+i]) ? ref_v[i - (1 << s)] : ref_v[i];
        ref_v = nxt;
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_d[i] !== ref_v[i]) begin
          failures++;
          if (failures < 5) $display("t%0d line %0d: %0d exp %0d", t, i, out_d[i], ref_v[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
