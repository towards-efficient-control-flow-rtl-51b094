// N x N Consecutive Spreading (CS) network, the broadcast stage of the
// control network.
//
// log2(N) stages; stage s can copy line i-2^s onto line i (line i keeps
// its own value otherwise).  With stages of span 1, 2, 4, ... a token on
// line j can be spread over any run of consecutive lines j..j+m, and
// several such runs can coexist, as in the source's 8x8 broadcast example
// where inputs a, b, c are each spread to a group of neighbouring outputs.
// The order of spans (1 first) and the one-select-per-line encoding are
// this design's choices.  cfg bit s*N+i selects the copy for line i in
// stage s.  Combinational; the stages are evaluated in one process, line
// N-1 first within a stage, so each line reads its source's value from
// before that stage.
module cs_network #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 4,
  localparam int unsigned S = $clog2(N)
) (
  input  logic [W-1:0]   in_d  [N],
  input  logic [S*N-1:0] cfg,
  output logic [W-1:0]   out_d [N]
);
  logic [W-1:0] st [N];   // lines after the stages applied so far

  always_comb begin
    st = in_d;
    for (int s = 0; s < S; s++) begin
      // high lines first, so every line still reads its stage-s source
      for (int i = N - 1; i >= (1 << s); i--)
        if (cfg[s*N + i]) st[i] = st[i - (1 << s)];
    end
    out_d = st;
  end
endmodule
