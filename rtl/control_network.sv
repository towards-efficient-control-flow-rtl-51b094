// CS-Benes control network: the peer-to-peer path of the control flow plane.
//
// Lines 0..15 (control output port 0 of PE 0..15) pass through one 16x16
// consecutive-spreading network and lines 16..31 (port 1) through a second
// one, which give broadcast; the 32 resulting lines and 32 further inputs
// (controller, control FIFOs, spare interface) enter a 64x64 Benes network,
// which gives any permutation.  Paths are fixed by the configuration, so a
// control transfer needs no arbitration, and every path carries one token
// per cycle.  Outputs are registered: a token sent in cycle t is at its
// destination in cycle t+1, the one-cycle control network latency of the
// source.  cfg layout, LSB first: Benes, CS network 0, CS network 1.
module control_network
  import marionette_pkg::*;
#(
  parameter int unsigned N    = CNET_N,
  parameter int unsigned CSN  = CS_N,
  localparam int unsigned BW  = N * (2 * $clog2(N) - 1),
  localparam int unsigned CW  = CSN * $clog2(CSN),
  localparam int unsigned CFG_W = BW + 2 * CW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CFG_W-1:0] cfg,
  input  token_t           in_tok  [N],
  output token_t           out_tok [N]
);
  localparam int unsigned TW = $bits(token_t);
  logic [TW-1:0] cs_in [2][CSN], cs_out [2][CSN];
  logic [TW-1:0] b_in [N], b_out [N];

  for (genvar c = 0; c < 2; c++) begin : g_cs
    for (genvar i = 0; i < CSN; i++) begin : g_l
      assign cs_in[c][i]     = in_tok[c*CSN + i];
      assign b_in[c*CSN + i] = cs_out[c][i];
    end
    cs_network #(.N(CSN), .W(TW)) u_cs (
      .in_d(cs_in[c]), .cfg(cfg[BW + c*CW +: CW]), .out_d(cs_out[c]));
  end

  for (genvar i = 2*CSN; i < N; i++) begin : g_direct
    assign b_in[i] = in_tok[i];
  end

  benes_network #(.N(N), .W(TW)) u_benes (.in_d(b_in), .cfg(cfg[BW-1:0]), .out_d(b_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) out_tok[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++) out_tok[i] <= b_out[i];
    end
  end
endmodule
