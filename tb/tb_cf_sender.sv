// Testbench for cf_sender: proactive emission in DFG mode only on a new
// configuration, branch-unit selection of taken / not-taken address,
// loop continue and loop end on their ports, and silence otherwise.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_cf_sender;
  import marionette_pkg::*;
  inst_t cfg;
  logic cfg_valid, cfg_new, fire, loop_cont, loop_end, ev_proactive, ev_branch;
  logic [DATA_W-1:0] result;
  token_t out_tok [2];
  int checks = 0, failures = 0;

  cf_sender dut (.cfg, .cfg_valid, .cfg_new, .fire, .result, .loop_cont, .loop_end,
                 .out_tok, .ev_proactive, .ev_branch);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input token_t e0, input token_t e1, input string what);
    #1; checks++;
    if (out_tok[0] !== e0 || out_tok[1] !== e1) begin
      failures++;
      $display("FAIL %s: p0=%0d/%0d p1=%0d/%0d", what, out_tok[0].valid, out_tok[0].addr,
               out_tok[1].valid, out_tok[1].addr);
    end
  endtask

  localparam token_t NONE = '0;
  initial begin
    cfg = '0; cfg.addr_t = 3'd5; cfg.addr_f = 3'd2;
    cfg_valid = 1; cfg_new = 0; fire = 0; loop_cont = 0; loop_end = 0; result = 0;
    // DFG mode
    cfg.mode = MODE_DFG; cfg.emit = 1; cfg.oport = 0;
    chk(NONE, NONE, "dfg no new cfg");
    cfg_new = 1; chk('{1'b1, 3'd5}, NONE, "dfg proactive port0");
    checks++; if (!ev_proactive) failures++;
    cfg.oport = 1; chk(NONE, '{1'b1, 3'd5}, "dfg proactive port1");
    cfg.emit = 0; chk(NONE, NONE, "dfg emit off");
    fire = 1; cfg.emit = 1; cfg_new = 0; chk(NONE, NONE, "dfg fire does not emit");
    // branch mode
    cfg.mode = MODE_BRANCH; cfg.oport = 0; cfg_new = 1; fire = 0;
    chk(NONE, NONE, "branch no proactive");
    fire = 1; result = 32'h100; chk('{1'b1, 3'd5}, NONE, "branch taken");
    checks++; if (!ev_branch) failures++;
    result = 0; chk('{1'b1, 3'd2}, NONE, "branch not taken");
    cfg_valid = 0; chk(NONE, NONE, "invalid cfg silent");
    cfg_valid = 1;
    // loop mode
    cfg.mode = MODE_LOOP; fire = 0; cfg_new = 0;
    loop_cont = 1; chk('{1'b1, 3'd5}, NONE, "loop continue");
    loop_cont = 0; loop_end = 1; chk(NONE, '{1'b1, 3'd2}, "loop end other port");
    cfg.oport = 1; chk('{1'b1, 3'd2}, NONE, "loop end port0 when oport=1");
    loop_end = 0; loop_cont = 1; cfg.emit = 0; chk(NONE, NONE, "continue without emit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
