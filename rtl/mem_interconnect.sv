// Memory access interconnect between the PEs and the data scratchpad banks.
//
// Every PE has one memory port; a host port serves loading and reading the
// scratchpad from outside.  A request goes to bank (word address mod NB).
// Each bank grants one request per cycle: the host first, then the PEs in
// round-robin order starting after the PE served last.  A PE that is not
// granted keeps its request (its data flow part stalls) and retries.  Read
// data is steered back to the requester in the next cycle.  Grants are
// combinational, in the cycle of the request.  The arbitration scheme is
// this design's choice; the source only names the interconnect.
module mem_interconnect
  import marionette_pkg::*;
#(
  parameter int unsigned NREQ = NUM_PE,
  parameter int unsigned NB   = NBANKS,
  localparam int unsigned BAW = DMEM_AW - $clog2(NB)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mem_req_t          pe_req   [NREQ],
  output logic [NREQ-1:0]   pe_gnt,
  output logic [DATA_W-1:0] pe_rdata [NREQ],
  input  mem_req_t          host_req,
  output logic              host_gnt,
  output logic [DATA_W-1:0] host_rdata,
  // bank side
  output logic [NB-1:0]     bank_req,
  output logic [NB-1:0]     bank_we,
  output logic [BAW-1:0]    bank_addr  [NB],
  output logic [DATA_W-1:0] bank_wdata [NB],
  input  logic [DATA_W-1:0] bank_rdata [NB],
  output logic              ev_conflict      // some request waited this cycle
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned RW = $clog2(NREQ);

  logic [RW-1:0] rr [NB];
  logic [RW-1:0] win [NB];
  logic [NB-1:0] win_v, host_b;
  logic [BW-1:0] rbank_q [NREQ];
  logic [BW-1:0] hbank_q;

  function automatic logic [BW-1:0] bank_of(input logic [DMEM_AW-1:0] a);
    return a[BW-1:0];
  endfunction

  always_comb begin
    pe_gnt   = '0;
    host_gnt = 1'b0;
    ev_conflict = 1'b0;
    for (int b = 0; b < NB; b++) begin
      host_b[b]     = host_req.req && (bank_of(host_req.addr) == BW'(b));
      win_v[b]      = 1'b0;
      win[b]        = '0;
      bank_req[b]   = 1'b0;
      bank_we[b]    = 1'b0;
      bank_addr[b]  = '0;
      bank_wdata[b] = '0;
      if (host_b[b]) begin
        host_gnt      = 1'b1;
        bank_req[b]   = 1'b1;
        bank_we[b]    = host_req.we;
        bank_addr[b]  = host_req.addr[DMEM_AW-1:BW];
        bank_wdata[b] = host_req.wdata;
      end else begin
        for (int k = 1; k <= NREQ; k++) begin
          automatic logic [RW-1:0] i = RW'((int'(rr[b]) + k) % NREQ);
          if (!win_v[b] && pe_req[i].req && bank_of(pe_req[i].addr) == BW'(b)) begin
            win_v[b] = 1'b1;
            win[b]   = i;
          end
        end
        if (win_v[b]) begin
          pe_gnt[win[b]] = 1'b1;
          bank_req[b]    = 1'b1;
          bank_we[b]     = pe_req[win[b]].we;
          bank_addr[b]   = pe_req[win[b]].addr[DMEM_AW-1:BW];
          bank_wdata[b]  = pe_req[win[b]].wdata;
        end
      end
    end
    for (int i = 0; i < NREQ; i++)
      if (pe_req[i].req && !pe_gnt[i]) ev_conflict = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) rr[b] <= RW'(NREQ-1);
      for (int i = 0; i < NREQ; i++) rbank_q[i] <= '0;
      hbank_q <= '0;
    end else begin
      for (int b = 0; b < NB; b++) if (win_v[b]) rr[b] <= win[b];
      for (int i = 0; i < NREQ; i++) if (pe_gnt[i]) rbank_q[i] <= bank_of(pe_req[i].addr);
      if (host_gnt) hbank_q <= bank_of(host_req.addr);
    end
  end

  for (genvar i = 0; i < NREQ; i++) begin : g_rd
    assign pe_rdata[i] = bank_rdata[rbank_q[i]];
  end
  assign host_rdata = bank_rdata[hbank_q];
endmodule
