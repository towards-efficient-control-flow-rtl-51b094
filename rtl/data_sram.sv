// Data scratchpad: 16 KB of 32-bit words in NBANKS independent banks.
//
// Each bank is a single-port synchronous RAM: one read or one write per
// cycle, read data registered and valid the cycle after the request.
// Words are interleaved over the banks by the low address bits (bank =
// word address mod NBANKS), which is handled by the memory interconnect;
// here every bank sees its own local word address.  The capacity follows
// the source; the number of banks and the interleaving are this design's
// choices.  Written as arrays, to be mapped to SRAM macros.
module data_sram
  import marionette_pkg::*;
#(
  parameter int unsigned BYTES = DMEM_BYTES,
  parameter int unsigned NB    = NBANKS,
  localparam int unsigned BANK_WORDS = BYTES / 4 / NB,
  localparam int unsigned BAW  = $clog2(BANK_WORDS)
) (
  input  logic              clk,
  input  logic [NB-1:0]     req,
  input  logic [NB-1:0]     we,
  input  logic [BAW-1:0]    addr  [NB],
  input  logic [DATA_W-1:0] wdata [NB],
  output logic [DATA_W-1:0] rdata [NB]
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [DATA_W-1:0] ram [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (req[b]) begin
        if (we[b]) ram[addr[b]] <= wdata[b];
        else       rdata[b]     <= ram[addr[b]];
      end
    end
  end
endmodule
