// Testbench for df_part: dataflow firing of a streaming ADD, operand
// pairing when A and B arrive at different times, local-register
// accumulation, branch mode (condition and forwarded operand), the loop
// generator with an immediate bound and II=2 (issue spacing checked), the
// loop generator with a bound taken from operand B, loads with a refused
// grant (stall) and a one-cycle load latency, stores, and once-release.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_df_part;
  import marionette_pkg::*;
  logic clk = 0, rst_n = 0;
  inst_t cfg;
  logic cfg_valid, cfg_new, mem_gnt, fire, loop_cont, loop_end, release_cfg, mem_stall, overflow;
  dword_t din [4], dout;
  mem_req_t mem_req;
  logic [DATA_W-1:0] mem_rdata, result;
  int checks = 0, failures = 0, cyc = 0;
  int got[$], got_t[$];
  int n_end = 0, n_rel = 0, n_stall = 0;

  df_part dut (.clk, .rst_n, .cfg, .cfg_valid, .cfg_new, .dir_used(4'hF), .din, .dout, .mem_req, .mem_gnt,
               .mem_rdata, .fire, .result, .loop_cont, .loop_end, .release_cfg, .mem_stall, .overflow);
  always #5 clk = ~clk;

  // memory model: word at address a holds a*3; one-cycle read latency
  logic [DATA_W-1:0] st_addr, st_data; logic st_seen;
  // the trigger drops a configuration once it is released
  always @(posedge clk) if (release_cfg) cfg_valid <= 1'b0;

  always_ff @(posedge clk) begin
    cyc++;
    if (mem_req.req && mem_gnt && !mem_req.we) mem_rdata <= 32'(mem_req.addr) * 3;
    if (mem_req.req && mem_gnt && mem_req.we) begin st_seen <= 1; st_addr <= 32'(mem_req.addr); st_data <= mem_req.wdata; end
    if (rst_n && dout.valid) begin got.push_back(int'(dout.data)); got_t.push_back(cyc); end
    if (rst_n && loop_end) n_end++;
    if (rst_n && release_cfg) n_rel++;
    if (rst_n && mem_stall) n_stall++;
  end

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_seq(input int exp[$], input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %p expected %p", what, got, exp);
    end
    got.delete(); got_t.delete();
  endtask

  task automatic newcfg(input inst_t c);
    cfg = c; cfg_valid = 1; cfg_new = 1;
    @(negedge clk); cfg_new = 0;
  endtask

  task automatic drive(input int dir, input int v);
    din[dir] = '{1'b1, 32'(v)};
    @(negedge clk);
    din[dir] = '0;
  endtask

  initial begin
    inst_t c;
    int exp[$];
    for (int i = 0; i < 4; i++) din[i] = '0;
    cfg = '0; cfg_valid = 0; cfg_new = 0; mem_gnt = 1; st_seen = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. stream ADD W + 7
    c = '0; c.mode = MODE_DFG; c.op = OP_ADD; c.src_a = SRC_W; c.src_b = SRC_IMM; c.imm = 7; c.out_en = 1;
    newcfg(c);
    for (int i = 0; i < 5; i++) drive(3, i * 10);
    repeat (3) @(negedge clk);
    expect_seq('{7, 17, 27, 37, 47}, "stream add");
    // 2. MUL N * E, B arrives three cycles later
    c.op = OP_MUL; c.src_a = SRC_N; c.src_b = SRC_E; newcfg(c);
    drive(0, 3); drive(0, 4); @(negedge clk);
    checks++; if (got.size() != 0) begin failures++; $display("FAIL fired without B"); end
    drive(1, 5); drive(1, 6); repeat (3) @(negedge clk);
    expect_seq('{15, 24}, "operand pairing");
    // 3. accumulate in local register, no output until a PASS reads it
    c.op = OP_ADD; c.src_a = SRC_W; c.src_b = SRC_LREG; c.wr_lreg = 1; c.out_en = 0; newcfg(c);
    for (int i = 1; i <= 4; i++) drive(3, i);
    repeat (2) @(negedge clk);
    c.op = OP_PASS; c.src_a = SRC_LREG; c.src_b = SRC_NONE; c.wr_lreg = 0; c.out_en = 1; c.once = 1;
    newcfg(c);
    @(negedge clk);
    expect_seq('{10}, "local register sum");
    checks++; if (n_rel != 1) begin failures++; $display("FAIL once release count %0d", n_rel); end
    // 4. branch: cond = A < 0, output = A
    c = '0; c.mode = MODE_BRANCH; c.op = OP_LT; c.src_a = SRC_W; c.src_b = SRC_IMM; c.imm = 0; c.out_en = 1;
    newcfg(c);
    din[3] = '{1'b1, -32'sd9}; @(negedge clk); din[3] = '0;
    #1 checks++; if (!(fire && result == 1)) begin failures++; $display("FAIL branch cond neg"); end
    @(negedge clk);
    din[3] = '{1'b1, 32'd4}; @(negedge clk); din[3] = '0;
    #1 checks++; if (!(fire && result == 0)) begin failures++; $display("FAIL branch cond pos"); end
    @(negedge clk);
    expect_seq('{-9, 4}, "branch forwards operand A");
    // 5. loop: start 2, bound 7, step 2, II = 2
    c = '0; c.mode = MODE_LOOP; c.src_a = SRC_NONE; c.src_b = SRC_IMM; c.imm = 7; c.imm2 = 2;
    c.step = 2; c.ii = 1; c.out_en = 1;
    newcfg(c);
    repeat (10) @(negedge clk);
    checks++;
    if (got_t.size() == 3 && (got_t[1] - got_t[0] != 2 || got_t[2] - got_t[1] != 2)) begin
      failures++; $display("FAIL loop II spacing %p", got_t);
    end
    expect_seq('{2, 4, 6}, "loop immediate bound");
    checks++; if (n_end != 1) begin failures++; $display("FAIL loop end count %0d", n_end); end
    // 6. loop with bound from operand B (south)
    c.src_b = SRC_S; c.imm2 = 0; c.step = 1; c.ii = 0;
    newcfg(c);
    repeat (2) @(negedge clk);
    checks++; if (got.size() != 0) begin failures++; $display("FAIL loop ran without bound"); end
    drive(2, 3); repeat (6) @(negedge clk);
    expect_seq('{0, 1, 2}, "loop bound from data");
    // 7. load with stalls: address W + 100, grant refused every other cycle
    c = '0; c.mode = MODE_DFG; c.op = OP_LD; c.src_a = SRC_W; c.src_b = SRC_NONE; c.imm = 100; c.out_en = 1;
    newcfg(c);
    mem_gnt = 0;
    drive(3, 1); drive(3, 2);
    mem_gnt = 1; @(negedge clk); mem_gnt = 0; @(negedge clk); mem_gnt = 1;
    repeat (4) @(negedge clk);
    expect_seq('{303, 306}, "loads");
    checks++; if (n_stall < 2) begin failures++; $display("FAIL stall count %0d", n_stall); end
    // 8. store B (east) to W + 5
    c.op = OP_ST; c.src_b = SRC_E; c.imm = 5; c.out_en = 0; newcfg(c);
    din[3] = '{1'b1, 32'd20}; din[1] = '{1'b1, 32'd77}; @(negedge clk); din[3] = '0; din[1] = '0;
    repeat (3) @(negedge clk);
    checks++; if (!(st_seen && st_addr == 25 && st_data == 77)) begin failures++; $display("FAIL store %0d %0d", st_addr, st_data); end
    checks++; if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
