// Data mesh network: nearest-neighbour links between the PEs.
//
// Every PE drives one data word per cycle (`pe_out`).  The mesh registers it
// (the PE's interconnect output register) and presents it in the next cycle
// on the matching input of each of the four neighbours: a PE's N input is
// the output of the PE above it, E the one to its right, S below, W to its
// left.  Inputs at the array edge carry no data.  Longer transfers are
// made by PEs passing words on, one hop per register.  PE index is
// row*COLS+col.  The one-word broadcast to all neighbours is this design's
// choice; the source draws a mesh of bidirectional links.
module data_mesh
  import marionette_pkg::*;
#(
  parameter int unsigned R = ROWS,
  parameter int unsigned C = COLS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  dword_t pe_out [R*C],
  output dword_t pe_in  [R*C][4]   // [pe][N,E,S,W]
);
  dword_t link_q [R*C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < R*C; i++) link_q[i] <= '0;
    end else begin
      for (int i = 0; i < R*C; i++) link_q[i] <= pe_out[i];
    end
  end

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      localparam int unsigned I = r*C + c;
      assign pe_in[I][0] = (r > 0)   ? link_q[I-C] : '0;
      assign pe_in[I][1] = (c < C-1) ? link_q[I+1] : '0;
      assign pe_in[I][2] = (r < R-1) ? link_q[I+C] : '0;
      assign pe_in[I][3] = (c > 0)   ? link_q[I-1] : '0;
    end
  end
endmodule
