// Control Flow Trigger of a Marionette PE: the PE's configuration unit.
//
// It holds the PE's instruction buffer and works in two phases, as the
// source describes it.  Check phase: a new control input (an instruction
// address) is latched and compared with the last address the PE ran.
// Configuration phase: if the address differs, the instruction buffer
// entry is read and registered in the buffered decoder; if it is the same,
// the decoded configuration already held is reused and the buffer is not
// read.  Either way the configuration is valid one cycle after the token
// is accepted (`cfg_new` marks that first cycle) and stays in force until
// another token is accepted.
//
// When a new token may be accepted (`ready`) follows the operator mode:
// a stream configuration (DFG or branch with `once` = 0) is replaced as
// soon as a new token arrives; a `once` configuration is held until it has
// fired one time, and a loop configuration until its loop has ended.  The
// data flow part reports both events on `release`.  This acceptance rule
// and the one-cycle configuration phase are this design's choices.
//
// `dir_used` marks the data mesh links that some buffered instruction reads
// (as operand A or B of a non-NOP instruction, or as the bound of a loop
// instruction); the data flow part captures exactly those links.
module cf_trigger
  import marionette_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // instruction buffer load port (from the controller)
  input  logic              ib_we,
  input  logic [ADDR_W-1:0] ib_waddr,
  input  inst_t             ib_wdata,
  // new control
  input  token_t            tok,
  output logic              ready,
  input  logic              release_cfg,
  // configuration towards the data flow part and the sender
  output inst_t             cfg,
  output logic              cfg_valid,
  output logic              cfg_new,
  output logic              reused,     // pulse: check phase found the same address
  output logic [ADDR_W-1:0] cur_addr,
  output logic [3:0]        dir_used
);
  inst_t             ib [IB_DEPTH];
  logic [ADDR_W-1:0] last_addr;
  logic              last_valid;
  logic              hold, accept, same;

  assign hold   = cfg_valid && !release_cfg && (cfg.once || cfg.mode == MODE_LOOP);
  assign ready  = !hold;
  assign accept = tok.valid && ready;
  assign same   = last_valid && (tok.addr == last_addr);
  assign cur_addr = last_addr;

  always_comb begin
    dir_used = '0;
    for (int e = 0; e < IB_DEPTH; e++) begin
      if (ib[e].op != OP_NOP && ib[e].mode != MODE_LOOP && ib[e].src_a <= SRC_W)
        dir_used[ib[e].src_a[1:0]] = 1'b1;
      if ((ib[e].op != OP_NOP || ib[e].mode == MODE_LOOP) && ib[e].src_b <= SRC_W)
        dir_used[ib[e].src_b[1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ib_we) ib[ib_waddr] <= ib_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= '0;
      cfg_valid  <= 1'b0;
      cfg_new    <= 1'b0;
      reused     <= 1'b0;
      last_addr  <= '0;
      last_valid <= 1'b0;
    end else begin
      cfg_new <= 1'b0;
      reused  <= 1'b0;
      if (ib_we && ib_waddr == last_addr) last_valid <= 1'b0;
      if (accept) begin
        cfg_valid <= 1'b1;
        cfg_new   <= 1'b1;
        reused    <= same;
        if (!same) begin
          cfg        <= ib[tok.addr];   // configuration phase: buffer read + decode
          last_addr  <= tok.addr;
          last_valid <= 1'b1;
        end
      end else if (release_cfg) begin
        cfg_valid <= 1'b0;
      end
    end
  end
endmodule
