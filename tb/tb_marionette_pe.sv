// Testbench for marionette_pe, one PE driven directly.  Checks:
//  * proactive emission: a DFG configuration with `emit` sends its token
//    one cycle after the PE accepted its own token, before any data;
//  * branch operator mode: one taken/not-taken token per data item and the
//    forwarded data;
//  * loop operator mode: continue tokens and indices, then a loop-end token;
//  * once-mode configurations queued ahead in the scheduler switch the PE
//    item by item (the branch-target behaviour), with the configuration of
//    each item in force when its data arrives;
//  * a repeated address is served without re-reading the buffer.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_marionette_pe;
  import marionette_pkg::*;
  logic clk = 0, rst_n = 0, ib_we, mem_gnt;
  logic [ADDR_W-1:0] ib_waddr;
  inst_t ib_wdata;
  token_t ctrl_in [2], ctrl_out [2];
  dword_t din [4], dout;
  mem_req_t mem_req;
  logic [31:0] mem_rdata;
  logic ev_fire, ev_proactive, ev_branch, ev_loop_cont, ev_loop_end, ev_reuse, ev_mem_stall, ev_overflow;
  int checks = 0, failures = 0, cyc = 0;
  int d_got[$], t_got[$], t_cyc[$], n_reuse = 0;

  marionette_pe dut (.clk, .rst_n, .ib_we, .ib_waddr, .ib_wdata, .ctrl_in, .ctrl_out, .din, .dout,
                     .mem_req, .mem_gnt, .mem_rdata, .ev_fire, .ev_proactive, .ev_branch,
                     .ev_loop_cont, .ev_loop_end, .ev_reuse, .ev_mem_stall, .ev_overflow);
  always #5 clk = ~clk;
  assign mem_gnt = 1'b1;
  assign mem_rdata = '0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && dout.valid) d_got.push_back(int'(dout.data));
    for (int p = 0; p < 2; p++)
      if (rst_n && ctrl_out[p].valid) begin t_got.push_back(p * 10 + int'(ctrl_out[p].addr)); t_cyc.push_back(cyc); end
    if (rst_n && ev_reuse) n_reuse++;
  end

  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(input int a, input inst_t x);
    ib_we = 1; ib_waddr = ADDR_W'(a); ib_wdata = x; @(negedge clk); ib_we = 0;
  endtask
  task automatic tok(input int a);
    ctrl_in[0] = '{1'b1, ADDR_W'(a)}; @(negedge clk); ctrl_in[0] = '0;
  endtask
  task automatic data(input int v);
    din[3] = '{1'b1, 32'(v)}; @(negedge clk); din[3] = '0;
  endtask
  task automatic expect_q(input int g[$], input int e[$], input string what);
    checks++;
    if (g != e) begin failures++; $display("FAIL %s: %p expected %p", what, g, e); end
  endtask

  initial begin
    inst_t x;
    int c0;
    ib_we = 0; ib_waddr = '0; ib_wdata = '0;
    ctrl_in[0] = '0; ctrl_in[1] = '0;
    for (int i = 0; i < 4; i++) din[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int e = 0; e < IB_DEPTH; e++) load(e, '0);   // empty instruction buffer
    // 1: DFG add, proactive emit of address 4 on port 1
    x = '0; x.mode = MODE_DFG; x.op = OP_ADD; x.src_a = SRC_W; x.src_b = SRC_IMM; x.imm = 1;
    x.out_en = 1; x.emit = 1; x.oport = 1; x.addr_t = 4; load(1, x);
    // 2: branch x < 0, taken -> 5, not taken -> 6
    x = '0; x.mode = MODE_BRANCH; x.op = OP_LT; x.src_a = SRC_W; x.src_b = SRC_IMM; x.imm = 0;
    x.out_en = 1; x.addr_t = 5; x.addr_f = 6; load(2, x);
    // 3: loop 0..2, continue -> 1 on port 0, end -> 7 on port 1
    x = '0; x.mode = MODE_LOOP; x.src_a = SRC_NONE; x.src_b = SRC_IMM; x.imm = 3; x.step = 1;
    x.out_en = 1; x.emit = 1; x.addr_t = 1; x.addr_f = 7; load(3, x);
    // 4 / 5: once-mode ADD 100 / MUL 3
    x = '0; x.mode = MODE_DFG; x.op = OP_ADD; x.src_a = SRC_W; x.src_b = SRC_IMM; x.imm = 100;
    x.out_en = 1; x.once = 1; load(4, x);
    x.op = OP_MUL; x.imm = 3; load(5, x);

    // proactive emission
    c0 = cyc;
    tok(1);
    @(negedge clk);
    expect_q(t_got, '{14}, "proactive token");
    checks++; if (t_cyc.size() != 1 || t_cyc[0] != c0 + 2) begin failures++; $display("FAIL proactive timing %p from %0d", t_cyc, c0); end
    checks++; if (d_got.size() != 0) begin failures++; $display("FAIL data before data"); end
    data(9); @(negedge clk);
    expect_q(d_got, '{10}, "dfg data");
    d_got.delete(); t_got.delete(); t_cyc.delete();

    // branch
    tok(2);
    data(-3); data(8); data(0); @(negedge clk);
    expect_q(t_got, '{5, 6, 6}, "branch tokens");
    expect_q(d_got, '{-3, 8, 0}, "branch data");
    tok(2); @(negedge clk);
    checks++; if (n_reuse != 1) begin failures++; $display("FAIL reuse %0d", n_reuse); end
    d_got.delete(); t_got.delete(); t_cyc.delete();

    // loop
    tok(3);
    repeat (8) @(negedge clk);
    expect_q(t_got, '{1, 1, 1, 17}, "loop tokens");
    expect_q(d_got, '{0, 1, 2}, "loop indices");
    d_got.delete(); t_got.delete(); t_cyc.delete();

    // once-mode tokens queued ahead of the data
    tok(4); tok(5); tok(4);
    data(1); data(2); data(3); repeat (2) @(negedge clk);
    expect_q(d_got, '{101, 6, 103}, "per-item configuration");
    checks++; if (ev_overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
