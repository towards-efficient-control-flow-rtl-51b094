// N x N Benes network of 2x2 switches.
//
// A Benes network of size N is a column of N/2 input switches, two Benes
// networks of size N/2 (upper and lower) and a column of N/2 output
// switches: 2*log2(N)-1 switch stages in all.  It can realise every
// permutation of its inputs (rearrangeable non-blocking); the routing is
// computed offline and loaded as `cfg`.  Each switch has one multiplexer
// per output, as drawn in the source: out0 = s0 ? in1 : in0 and
// out1 = s1 ? in0 : in1, so (0,0) is straight and (1,1) is crossed, and
// (1,0) / (0,1) copy one input to both outputs.
//
// The recursion is flattened here into levels.  Level d holds 2^d
// sub-networks of size n = N/2^d.  Their lines sit side by side, the
// upper half of each parent's lines going to its upper child.  Input
// switch k of sub-network j takes lines j*n+2k and j*n+2k+1 and feeds
// line k of the upper child (j*n+k) and of the lower child (j*n+n/2+k).
// Output switch k takes line k of both children and drives lines j*n+2k
// and j*n+2k+1.
//
// cfg layout, LSB first, defined recursively: input column (2 bits per
// switch, switch 0 first), upper sub-network, lower sub-network, output
// column; a 2x2 network is just its one switch.  `sub_off` gives the
// offset of sub-network j of level d in this layout; the offsets are a
// constant table.  Purely
// combinational; the switch structure follows the source, the
// configuration layout is this design's choice.
module benes_network #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 4,
  localparam int unsigned CFG_W = N * (2 * $clog2(N) - 1)
) (
  input  logic [W-1:0]     in_d  [N],
  input  logic [CFG_W-1:0] cfg,
  output logic [W-1:0]     out_d [N]
);
  localparam int unsigned L = $clog2(N);

  // configuration bits of a Benes network with n lines
  function automatic int unsigned net_w(input int unsigned n);
    return n * (2 * $clog2(n) - 1);
  endfunction

  // cfg offset of sub-network j at level d
  function automatic int unsigned sub_off(input int unsigned d, input int unsigned j);
    int unsigned o = 0, n = N;
    for (int unsigned t = 0; t < d; t++) begin
      o += n;                                            // skip the input column
      if (((j >> (d - 1 - t)) & 1) != 0) o += net_w(n / 2);  // skip the upper child
      n /= 2;
    end
    return o;
  endfunction

  // cfg offsets of the input column (OFF[0]) and output column (OFF[1]) of
  // every sub-network, computed at elaboration
  // entry (c, d, j) at bits 32*((c*L + d)*N/2 + j)
  localparam int unsigned NOFF = 2 * L * (N / 2);
  function automatic logic [32*NOFF-1:0] offsets();
    logic [32*NOFF-1:0] r;
    for (int unsigned d = 0; d < L; d++)
      for (int unsigned j = 0; j < N / 2; j++) begin
        r[32*(d*(N/2) + j) +: 32]       = (j < (1 << d)) ? 32'(sub_off(d, j)) : 32'd0;
        r[32*((L + d)*(N/2) + j) +: 32] = (j < (1 << d)) ?
            32'(sub_off(d, j) + (N >> d) + 2 * net_w((N >> d) / 2)) : 32'd0;
      end
    return r;
  endfunction
  localparam logic [32*NOFF-1:0] OFF = offsets();

  logic [W-1:0] fw [L][N];   // inputs of the level-d sub-networks
  logic [W-1:0] bw [L][N];   // outputs of the level-d sub-networks

  always_comb begin
    fw[0] = in_d;
    for (int unsigned d = 0; d + 1 < L; d++) begin
      for (int unsigned j = 0; j < (1 << d); j++) begin
        for (int unsigned k = 0; k < (N >> (d + 1)); k++) begin
          automatic int unsigned n = N >> d;
          automatic int unsigned o = OFF[32*(d*(N/2) + j) +: 32];
          fw[d+1][j*n + k]       = cfg[o + 2*k]     ? fw[d][j*n + 2*k + 1] : fw[d][j*n + 2*k];
          fw[d+1][j*n + n/2 + k] = cfg[o + 2*k + 1] ? fw[d][j*n + 2*k]     : fw[d][j*n + 2*k + 1];
        end
      end
    end
    for (int unsigned j = 0; j < N / 2; j++) begin
      automatic int unsigned o = OFF[32*((L-1)*(N/2) + j) +: 32];
      bw[L-1][2*j]     = cfg[o]     ? fw[L-1][2*j + 1] : fw[L-1][2*j];
      bw[L-1][2*j + 1] = cfg[o + 1] ? fw[L-1][2*j]     : fw[L-1][2*j + 1];
    end
    for (int d = int'(L) - 2; d >= 0; d--) begin
      for (int unsigned j = 0; j < (1 << d); j++) begin
        for (int unsigned k = 0; k < (N >> (d + 1)); k++) begin
          automatic int unsigned n = N >> d;
          automatic int unsigned o = OFF[32*((L + d)*(N/2) + j) +: 32];
          bw[d][j*n + 2*k]     = cfg[o + 2*k]     ? bw[d+1][j*n + n/2 + k] : bw[d+1][j*n + k];
          bw[d][j*n + 2*k + 1] = cfg[o + 2*k + 1] ? bw[d+1][j*n + k]       : bw[d+1][j*n + n/2 + k];
        end
      end
    end
    out_d = bw[0];
  end
endmodule
