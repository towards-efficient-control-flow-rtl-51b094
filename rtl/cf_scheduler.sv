// Control Flow Scheduler of a Marionette PE.
//
// Each PE has two control inputs from the control network.  Every input
// has its own token queue (the buffer drawn inside the scheduler); the
// Control Flow Arbiter picks which queue head is offered to the Control
// Flow Trigger.  The running configuration sets the priority (`prio`):
// 0 serves input 0 first, 1 serves input 1 first, so the compiler can
// favour, for example, the tokens of an inner loop over those of an outer
// loop.  A head is removed only when the trigger accepts it (`out_ready`),
// so a trigger that holds a loop configuration simply leaves new control
// waiting here.  The queues fall through when empty: a token arriving in
// cycle t can be accepted by the trigger in cycle t.
// The queue depth and the fixed-priority rule are this design's choices;
// the source only names the multiplexer, the arbiter and its buffer.
module cf_scheduler
  import marionette_pkg::*;
#(
  parameter int unsigned TOKQ_DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t in_tok [2],
  input  logic   prio,
  output token_t out_tok,      // offered token (valid = something waiting)
  input  logic   out_ready,    // trigger accepts out_tok this cycle
  output logic   overflow      // a token was lost (queue full)
);
  logic [ADDR_W-1:0] head [2];
  logic [1:0]        empty, full, ovf, rd;
  logic              sel;

  for (genvar p = 0; p < 2; p++) begin : g_q
    sync_fifo #(.WIDTH(ADDR_W), .DEPTH(TOKQ_DEPTH), .FALLTHROUGH(1'b1)) u_q (
      .clk, .rst_n,
      .wr_en   (in_tok[p].valid),
      .wr_data (in_tok[p].addr),
      .rd_en   (rd[p]),
      .rd_data (head[p]),
      .empty   (empty[p]),
      .full    (full[p]),
      .overflow(ovf[p])
    );
  end

  // Arbiter: preferred port if it has a token, otherwise the other one.
  always_comb begin
    if (!empty[prio]) sel = prio;
    else              sel = !prio;
    out_tok.valid = !empty[sel];
    out_tok.addr  = head[sel];
    rd            = '0;
    rd[sel]       = out_ready && out_tok.valid;
  end

  assign overflow = |ovf;
endmodule
