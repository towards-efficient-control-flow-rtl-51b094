// Control Flow Sender of a Marionette PE.
//
// Decides which control token (instruction address for a downstream PE)
// the PE drives onto its two control network outputs in each cycle.  It
// contains the branch unit and a selector between it and the control
// input path, with the three operator modes of the source:
//  * DFG operator mode: proactive emission.  In the first cycle of a newly
//    accepted configuration (`cfg_new`), if `emit` is set, `addr_t` is sent
//    at once, so the next PE of the same basic block configures while this
//    PE is still computing.
//  * Branch operator mode: no proactive token.  When the data flow part
//    fires, the branch unit tests the result (non-zero = taken) and sends
//    `addr_t` or `addr_f`.
//  * Loop operator mode: every issued iteration sends `addr_t` (loop
//    continue, towards the inner-loop PEs) if `emit` is set; when the loop
//    ends `addr_f` is sent (loop end, towards the outer-loop PEs).
// `addr_t` tokens leave on port `oport`, loop-end tokens on the other
// port.  The port assignment is this design's choice.  Purely combinational.
module cf_sender
  import marionette_pkg::*;
(
  input  inst_t             cfg,
  input  logic              cfg_valid,
  input  logic              cfg_new,
  input  logic              fire,        // data flow part fired this cycle
  input  logic [DATA_W-1:0] result,      // computation result (branch unit input)
  input  logic              loop_cont,   // loop generator issued an iteration
  input  logic              loop_end,    // loop generator finished
  output token_t            out_tok [2],
  output logic              ev_proactive,
  output logic              ev_branch
);
  logic taken;
  assign taken = |result;

  always_comb begin
    out_tok[0]   = '0;
    out_tok[1]   = '0;
    ev_proactive = 1'b0;
    ev_branch    = 1'b0;
    if (cfg_valid) begin
      unique case (cfg.mode)
        MODE_DFG: if (cfg_new && cfg.emit) begin
          out_tok[cfg.oport] = '{valid: 1'b1, addr: cfg.addr_t};
          ev_proactive       = 1'b1;
        end
        MODE_BRANCH: if (fire) begin
          out_tok[cfg.oport] = '{valid: 1'b1, addr: taken ? cfg.addr_t : cfg.addr_f};
          ev_branch          = 1'b1;
        end
        MODE_LOOP: begin
          if (loop_cont && cfg.emit) out_tok[cfg.oport] = '{valid: 1'b1, addr: cfg.addr_t};
          if (loop_end)              out_tok[!cfg.oport] = '{valid: 1'b1, addr: cfg.addr_f};
        end
        default: ;
      endcase
    end
  end
endmodule
