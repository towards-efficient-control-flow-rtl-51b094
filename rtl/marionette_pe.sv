// Marionette PE: a control flow part and a data flow part side by side.
//
// Control flow part: the Control Flow Scheduler queues the tokens arriving
// on the PE's two control inputs, the Control Flow Trigger turns an
// accepted token (instruction address) into a held configuration, and the
// Control Flow Sender drives the PE's two control outputs.  Data flow part:
// input buffers, function unit, local register, loop generator and memory
// port.  The two parts only share the configuration and a few event lines,
// so a PE can accept the next configuration while its data flow part is
// still computing under the current one (temporally loose coupling).
// Timing: a token present at `ctrl_in` in cycle t can be accepted in cycle
// t and its configuration is in force from cycle t+1; tokens leave on
// `ctrl_out` in the cycle they are produced (the network registers them).
//
// The split into scheduler, trigger, sender and data flow part follows the
// source's PE drawing; the two control ports per side and the event lines
// are this design's choices.
module marionette_pe
  import marionette_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ib_we,
  input  logic [ADDR_W-1:0] ib_waddr,
  input  inst_t             ib_wdata,
  input  token_t            ctrl_in  [2],
  output token_t            ctrl_out [2],
  input  dword_t            din      [4],
  output dword_t            dout,
  output mem_req_t          mem_req,
  input  logic              mem_gnt,
  input  logic [DATA_W-1:0] mem_rdata,
  // event lines for statistics
  output logic              ev_fire,
  output logic              ev_proactive,
  output logic              ev_branch,
  output logic              ev_loop_cont,
  output logic              ev_loop_end,
  output logic              ev_reuse,
  output logic              ev_mem_stall,
  output logic              ev_overflow
);
  token_t            sch_tok;
  logic              trg_ready, release_cfg, cfg_valid, cfg_new, reused;
  inst_t             cfg;
  logic [3:0]        dir_used;
  logic [ADDR_W-1:0] cur_addr;
  logic [DATA_W-1:0] result;
  logic              fire, loop_cont, loop_end, sch_ovf, df_ovf, mem_stall;

  cf_scheduler u_sched (
    .clk, .rst_n, .in_tok(ctrl_in), .prio(cfg.prio),
    .out_tok(sch_tok), .out_ready(trg_ready), .overflow(sch_ovf));

  cf_trigger u_trig (
    .clk, .rst_n, .ib_we, .ib_waddr, .ib_wdata,
    .tok(sch_tok), .ready(trg_ready), .release_cfg,
    .cfg, .cfg_valid, .cfg_new, .reused, .cur_addr, .dir_used);

  df_part u_df (
    .clk, .rst_n, .cfg, .cfg_valid, .cfg_new, .dir_used, .din, .dout,
    .mem_req, .mem_gnt, .mem_rdata,
    .fire, .result, .loop_cont, .loop_end, .release_cfg, .mem_stall, .overflow(df_ovf));

  cf_sender u_send (
    .cfg, .cfg_valid, .cfg_new, .fire, .result, .loop_cont, .loop_end,
    .out_tok(ctrl_out), .ev_proactive, .ev_branch);

  assign ev_fire      = fire;
  assign ev_loop_cont = loop_cont;
  assign ev_loop_end  = loop_end;
  assign ev_reuse     = reused;
  assign ev_mem_stall = mem_stall;
  assign ev_overflow  = sch_ovf || df_ovf;
endmodule
