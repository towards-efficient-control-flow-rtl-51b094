// Data flow part of a Marionette PE.
//
// Each neighbour link (N/E/S/W) of the data mesh has an input buffer.  A
// link is captured whenever some instruction in the PE's buffer reads it
// (`dir_used`, from the trigger), independent of which configuration is
// active, so data that arrives before its control token is kept.  Two
// operand multiplexers pick the head of one input buffer each; the local
// register and the immediate are the other operand sources.  The computation function unit fires, in DFG
// and branch operator mode, as soon as the configuration is valid and every
// operand it needs is buffered (dataflow firing), so producer/consumer
// pipelines run at one item per cycle.  The result goes to the data
// network (`dout`, combinational, registered in the mesh) and optionally to
// the local register.  LD/ST use the scratchpad port: a request must be
// granted in the cycle it fires, and load data returns one cycle later, when
// it is put on `dout`.  In branch operator mode the result is the branch
// condition for the sender and the forwarded data is operand A.
//
// In loop operator mode this part is the loop generator: after a new
// configuration it starts at `imm2`, takes its bound from `imm` or from the
// first word buffered on operand B (a bound computed by an outer basic
// block), and issues one index every `ii`+1 cycles, which is the
// configurable pipeline initiation interval.  When the index reaches the
// bound it signals loop end, which releases the configuration.
// The source gives the block structure (muxes, buffers, function unit,
// local register, selector) and the loop-operator behaviour; the opcode set,
// the firing rule and the memory timing are this design's choices.
module df_part
  import marionette_pkg::*;
#(
  parameter int unsigned OPQ_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  inst_t             cfg,
  input  logic              cfg_valid,
  input  logic              cfg_new,
  input  logic [3:0]        dir_used,   // links read by some buffered instruction
  input  dword_t            din [4],      // N, E, S, W
  output dword_t            dout,
  output mem_req_t          mem_req,
  input  logic              mem_gnt,
  input  logic [DATA_W-1:0] mem_rdata,
  output logic              fire,
  output logic [DATA_W-1:0] result,
  output logic              loop_cont,
  output logic              loop_end,
  output logic              release_cfg,
  output logic              mem_stall,
  output logic              overflow
);
  logic              a_dir, b_dir, a_empty, b_empty;
  logic              a_pop, b_pop, a_ok, b_ok, is_mem, is_ld, ld_pending;
  logic [DATA_W-1:0] a_head, b_head, a_val, b_val, lreg, alu;
  logic [DATA_W-1:0] iter, bound;
  logic              running, bound_ok;
  logic [2:0]        iiq;
  logic              issue_slot, can_fire;

  assign a_dir = (cfg.src_a <= SRC_W);
  assign b_dir = (cfg.src_b <= SRC_W);

  logic [3:0]        q_empty, q_ovf, q_pop, q_full;
  logic [DATA_W-1:0] q_head [4];

  for (genvar d = 0; d < 4; d++) begin : g_inq
    assign q_pop[d] = (a_pop && cfg.src_a[1:0] == 2'(d)) || (b_pop && cfg.src_b[1:0] == 2'(d));
    sync_fifo #(.WIDTH(DATA_W), .DEPTH(OPQ_DEPTH)) u_q (
      .clk, .rst_n,
      .wr_en(dir_used[d] && din[d].valid), .wr_data(din[d].data),
      .rd_en(q_pop[d]), .rd_data(q_head[d]), .empty(q_empty[d]), .full(q_full[d]),
      .overflow(q_ovf[d]));
  end

  assign a_head  = q_head[cfg.src_a[1:0]];
  assign b_head  = q_head[cfg.src_b[1:0]];
  assign a_empty = q_empty[cfg.src_a[1:0]];
  assign b_empty = q_empty[cfg.src_b[1:0]];

  function automatic logic [DATA_W-1:0] opnd(input src_e s, input logic [DATA_W-1:0] head,
                                             input logic [DATA_W-1:0] lr, input logic [15:0] im);
    unique case (s)
      SRC_N, SRC_E, SRC_S, SRC_W: return head;
      SRC_LREG:                   return lr;
      SRC_IMM:                    return sext16(im);
      default:                    return '0;
    endcase
  endfunction

  assign a_val = opnd(cfg.src_a, a_head, lreg, cfg.imm);
  assign b_val = opnd(cfg.src_b, b_head, lreg, cfg.imm);
  assign a_ok  = !a_dir || !a_empty;
  assign b_ok  = !b_dir || !b_empty;

  // computation function unit
  always_comb begin
    unique case (cfg.op)
      OP_ADD:  alu = a_val + b_val;
      OP_SUB:  alu = a_val - b_val;
      OP_MUL:  alu = a_val * b_val;
      OP_AND:  alu = a_val & b_val;
      OP_OR:   alu = a_val | b_val;
      OP_XOR:  alu = a_val ^ b_val;
      OP_SHL:  alu = a_val << b_val[4:0];
      OP_SHR:  alu = a_val >> b_val[4:0];
      OP_SRA:  alu = $signed(a_val) >>> b_val[4:0];
      OP_LT:   alu = DATA_W'($signed(a_val) <  $signed(b_val));
      OP_GE:   alu = DATA_W'($signed(a_val) >= $signed(b_val));
      OP_EQ:   alu = DATA_W'(a_val == b_val);
      OP_NE:   alu = DATA_W'(a_val != b_val);
      OP_MIN:  alu = ($signed(a_val) < $signed(b_val)) ? a_val : b_val;
      OP_MAX:  alu = ($signed(a_val) < $signed(b_val)) ? b_val : a_val;
      OP_PASS: alu = a_val;
      OP_LTU:  alu = DATA_W'(a_val < b_val);
      OP_LD, OP_ST: alu = a_val + sext16(cfg.imm);   // effective address
      default: alu = '0;
    endcase
  end

  assign is_ld  = (cfg.op == OP_LD);
  assign is_mem = is_ld || (cfg.op == OP_ST);

  // DFG / branch firing
  assign can_fire = cfg_valid && (cfg.mode != MODE_LOOP) && (cfg.op != OP_NOP)
                    && a_ok && b_ok && !(ld_pending && !is_ld);
  assign mem_req.req   = can_fire && is_mem;
  assign mem_req.we    = (cfg.op == OP_ST);
  assign mem_req.addr  = alu[DMEM_AW-1:0];
  assign mem_req.wdata = b_val;
  assign fire      = can_fire && (!is_mem || mem_gnt);
  assign mem_stall = mem_req.req && !mem_gnt;
  assign result    = alu;

  // loop generator
  assign issue_slot = cfg_valid && (cfg.mode == MODE_LOOP) && running && bound_ok
                      && (iiq == '0) && !cfg_new;
  assign loop_cont  = issue_slot && ($signed(iter) <  $signed(bound));
  assign loop_end   = issue_slot && ($signed(iter) >= $signed(bound));

  assign a_pop = fire && a_dir;
  assign b_pop = (fire && b_dir) ||
                 (cfg_valid && cfg.mode == MODE_LOOP && running && !bound_ok && b_dir && !b_empty);

  assign release_cfg = (fire && cfg.once) || loop_end;

  // output selector
  always_comb begin
    dout = '0;
    if (ld_pending)
      dout = '{valid: 1'b1, data: mem_rdata};
    else if (loop_cont && cfg.out_en)
      dout = '{valid: 1'b1, data: iter};
    else if (fire && cfg.out_en && !is_mem)
      dout = '{valid: 1'b1, data: (cfg.mode == MODE_BRANCH) ? a_val : alu};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lreg       <= '0;
      ld_pending <= 1'b0;
      iter       <= '0;
      bound      <= '0;
      running    <= 1'b0;
      bound_ok   <= 1'b0;
      iiq        <= '0;
    end else begin
      ld_pending <= fire && is_ld && cfg.out_en;
      if (fire && cfg.wr_lreg && !is_mem) lreg <= alu;
      if (cfg_new && cfg.mode == MODE_LOOP) begin
        iter     <= sext16(cfg.imm2);
        running  <= 1'b1;
        iiq      <= '0;
        bound_ok <= (cfg.src_b == SRC_IMM);
        bound    <= sext16(cfg.imm);
      end else begin
        if (b_pop && !fire) begin
          bound    <= b_head;
          bound_ok <= 1'b1;
        end
        if (loop_cont) begin
          iter <= iter + DATA_W'(cfg.step);
          iiq  <= cfg.ii;
        end else if (iiq != '0) begin
          iiq <= iiq - 1'b1;
        end
        if (loop_end) running <= 1'b0;
      end
    end
  end

  assign overflow = |q_ovf;
endmodule
