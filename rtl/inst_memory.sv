// Instruction scratchpad: 2 KB holding a Marionette program.
//
// 256 words of 64 bits.  The host writes words; the controller reads them
// with one-cycle latency while it loads the array.  Layout of a program,
// which is this design's choice: words 0..127 are the instruction buffers
// (PE p, entry e at word p*8+e); words 128..140 hold the 832-bit control
// network configuration, least significant word first; word 141 holds the
// two start tokens (bits 2:0 address and bit 3 valid for controller output
// 0, bits 6:4 and 7 for output 1).  Written as an array (an SRAM macro).
module inst_memory
  import marionette_pkg::*;
#(
  parameter int unsigned WORDS = IMEM_WORDS,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [INST_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [INST_W-1:0] rdata
);
  logic [INST_W-1:0] ram [WORDS];
  always_ff @(posedge clk) begin
    if (we) ram[waddr] <= wdata;
    if (re) rdata <= ram[raddr];
  end
endmodule
