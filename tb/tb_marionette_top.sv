// End-to-end testbench for marionette_top at its default size (4x4 PEs,
// 64x64 control network, 16 KB data scratchpad).
//
// Program: an imperfect loop nest whose inner body is a branch divergence.
//   for j in 0..R-1:              // outer loop, PE8, runs ahead
//     for i in 0..N-1:            // inner loop, PE0
//       x = X[i]                  // PE1 load
//       if (x < 0) Y[i] = x + 100 // PE2 branch; PE3 / PE7 basic block "BB2"
//       else       Z[i] = 3 * x   //             PE3 / PE7 basic block "BB3"
// The index i reaches the store PE (PE7) through PE4-PE5-PE6.  PE0's
// continue token is broadcast by CS network 0 to PE1, PE2, PE4, PE5, PE6.
// The outer loop leaves one "run the inner loop" token per iteration and a
// final "finish" token in control FIFO 0; each inner-loop end pops the
// next one, and the finish token makes PE0 send the done address to the
// controller.  PE2 tells PE3 which basic block comes next for every item;
// PE3 forwards the same choice to PE7 proactively, before its data.
// Checks: Y and Z contents, untouched words, and that every mechanism was
// exercised (proactive emission, branch tokens, loop continue / end,
// configuration reuse, control FIFO push / pop, CS broadcast, bank
// conflicts) with the expected counts, and the run time.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_marionette_top;
  import marionette_pkg::*;
  import benes_route_pkg::*;

  localparam int N = 16, R = 3;
  localparam int XB = 256, YB = 515, ZB = 771;   // stores trail loads by 7 items: +3 puts them on the same bank
  localparam int SENT = 32'h5A5A0000;
  localparam int NETW = (NET_CFG_W + 63) / 64;

  logic clk = 0, rst_n = 0, imem_we = 0, start = 0, busy, done, host_mem_gnt;
  logic [IMEM_AW-1:0] imem_waddr;
  logic [INST_W-1:0] imem_wdata;
  mem_req_t host_mem_req;
  logic [DATA_W-1:0] host_mem_rdata;
  logic [31:0] run_cycles;
  token_t ext_ctrl_in [N_EXT_IN], ext_ctrl_out [N_EXT_OUT];
  logic [NUM_PE-1:0] ev_fire, ev_proactive, ev_branch, ev_loop_cont, ev_loop_end, ev_reuse, ev_mem_stall;
  logic [N_CFIFO-1:0] ev_cfifo_push, ev_cfifo_pop;
  logic ev_bank_conflict, ev_overflow;
  int checks = 0, failures = 0;

  marionette_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // event counters
  int c_pro = 0, c_br = 0, c_cont = 0, c_end = 0, c_reuse = 0, c_push = 0, c_pop = 0;
  int c_conf = 0, c_stall = 0, c_ovf = 0, c_bcast = 0, c_st = 0, c_taken = 0;
  always @(posedge clk) if (rst_n) begin
    c_pro   += $countones(ev_proactive);
    c_br    += $countones(ev_branch);
    c_cont  += $countones(ev_loop_cont);
    c_end   += $countones(ev_loop_end);
    c_reuse += $countones(ev_reuse);
    c_push  += $countones(ev_cfifo_push);
    c_pop   += $countones(ev_cfifo_pop);
    c_conf  += int'(ev_bank_conflict);
    c_stall += $countones(ev_mem_stall);
    c_ovf   += int'(ev_overflow);
    c_st    += int'(ev_fire[7]);
    // a token reaching PE5 input 0 can only have come through the CS broadcast
    if (dut.net_out[5].valid) c_bcast++;
    if (ev_branch[2] && dut.pe_cout[2][1].addr == 3'd1) c_taken++;
  end

  function automatic inst_t base(mode_e m, op_e op, src_e a, src_e b, int imm);
    inst_t x = '0;
    x.mode = m; x.op = op; x.src_a = a; x.src_b = b; x.imm = 16'(imm);
    return x;
  endfunction

  logic [INST_W-1:0] prog [IMEM_WORDS];

  task automatic put(int pe, int e, inst_t x); prog[pe * 8 + e] = INST_W'(x); endtask

  task automatic build_program();
    inst_t x;
    int map[];
    logic [NET_CFG_W-1:0] nc;
    logic [NETW*64-1:0] ncw;
    foreach (prog[i]) prog[i] = '0;
    // PE0 inner loop; entry 1 = finish (empty loop, sends the done address)
    x = base(MODE_LOOP, OP_NOP, SRC_NONE, SRC_IMM, N); x.step = 1; x.emit = 1; x.out_en = 1;
    x.addr_t = 0; x.addr_f = 0; put(0, 0, x);
    x = base(MODE_LOOP, OP_NOP, SRC_NONE, SRC_IMM, 0); x.addr_f = DONE_ADDR; put(0, 1, x);
    // PE1 load X[i]
    x = base(MODE_DFG, OP_LD, SRC_W, SRC_NONE, XB); x.out_en = 1; put(1, 0, x);
    // PE2 branch x < 0 -> 1 (BB2) else 2 (BB3), tokens on port 1
    x = base(MODE_BRANCH, OP_LT, SRC_W, SRC_IMM, 0); x.out_en = 1; x.oport = 1;
    x.addr_t = 1; x.addr_f = 2; put(2, 0, x);
    // PE3 BB2: x + 100, BB3: 3 * x; once per item, proactive forward to PE7
    x = base(MODE_DFG, OP_ADD, SRC_W, SRC_IMM, 100); x.once = 1; x.out_en = 1; x.emit = 1;
    x.oport = 1; x.addr_t = 1; put(3, 1, x);
    x = base(MODE_DFG, OP_MUL, SRC_W, SRC_IMM, 3); x.once = 1; x.out_en = 1; x.emit = 1;
    x.oport = 1; x.addr_t = 2; put(3, 2, x);
    // PE4..6 pass the index along row 1
    x = base(MODE_DFG, OP_PASS, SRC_N, SRC_NONE, 0); x.out_en = 1; put(4, 0, x);
    x.src_a = SRC_W; put(5, 0, x); put(6, 0, x);
    // PE7 BB2: Y[i] = v, BB3: Z[i] = v
    x = base(MODE_DFG, OP_ST, SRC_W, SRC_N, YB); x.once = 1; put(7, 1, x);
    x.imm = 16'(ZB); put(7, 2, x);
    // PE8 outer loop j = 1..R-1 (the first inner run is started by the controller)
    x = base(MODE_LOOP, OP_NOP, SRC_NONE, SRC_IMM, R); x.imm2 = 1; x.step = 1; x.emit = 1;
    x.addr_t = 0; x.addr_f = 1; put(8, 0, x);
    // control network
    map = new[CNET_N];
    foreach (map[i]) map[i] = -1;
    map[1] = 1; map[2] = 2; map[4] = 4; map[5] = 5; map[6] = 6;       // CS0 copies of PE0 port 0
    map[CS_N + 0] = NO_POP + 0;                                          // PE0 loop end -> pop FIFO0
    map[CS_N + 1] = NO_CTRL;                                             // CS1 copy of it -> controller
    map[CS_N + 2] = 3;                                                   // PE2 branch -> PE3
    map[CS_N + 3] = 7;                                                   // PE3 proactive -> PE7
    map[8] = NO_PUSHA + 0;                                               // PE8 continue -> FIFO0
    map[CS_N + 8] = NO_PUSHB + 0;                                        // PE8 end -> FIFO0
    map[NI_CTRL + 0] = 8;                                                // start PE8
    map[NI_CTRL + 1] = 0;                                                // start PE0
    map[NI_CFIFO + 0] = CS_N + 0;                                        // FIFO0 -> PE0 input 1
    // unused inputs go to the spare outputs first, so they disturb nothing
    begin
      int nxt = NO_EXT;
      bit used [CNET_N];
      foreach (used[i]) used[i] = 0;
      foreach (map[i]) if (map[i] >= 0) used[map[i]] = 1;
      for (int i = 0; i < CNET_N; i++)
        if (map[i] < 0 && nxt < CNET_N) begin map[i] = nxt; used[nxt] = 1; nxt++; end
    end
    route_partial(CNET_N, map);
    nc = '0;
    for (int b = 0; b < BENES_CFG_W; b++) nc[b] = cfgbits[b];
    // CS0: line 0 spread over lines 0..7; CS1: line 0 copied to line 1
    nc[BENES_CFG_W + 0*CS_N + 1] = 1'b1;
    nc[BENES_CFG_W + 1*CS_N + 2] = 1'b1; nc[BENES_CFG_W + 1*CS_N + 3] = 1'b1;
    for (int i = 4; i < 8; i++) nc[BENES_CFG_W + 2*CS_N + i] = 1'b1;
    nc[BENES_CFG_W + CS_CFG_W + 1] = 1'b1;
    ncw = '0; ncw[NET_CFG_W-1:0] = nc;
    for (int w = 0; w < NETW; w++) prog[128 + w] = ncw[w*64 +: 64];
    prog[128 + NETW] = 64'h88;   // start tokens: address 0 on both controller outputs
  endtask

  task automatic mem_write(int a, int v);
    host_mem_req = '{1'b1, 1'b1, DMEM_AW'(a), 32'(v)}; @(negedge clk); host_mem_req = '0;
  endtask
  task automatic mem_read(int a, output int v);
    host_mem_req = '{1'b1, 1'b0, DMEM_AW'(a), 32'd0}; @(negedge clk); host_mem_req = '0;
    v = int'(host_mem_rdata);
  endtask

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int xv [N];
    int v, t0;
    host_mem_req = '0;
    foreach (ext_ctrl_in[i]) ext_ctrl_in[i] = '0;
    imem_waddr = '0; imem_wdata = '0;
    build_program();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 142; a++) begin
      imem_we = 1; imem_waddr = IMEM_AW'(a); imem_wdata = prog[a]; @(negedge clk);
    end
    imem_we = 0;
    for (int i = 0; i < N; i++) begin
      xv[i] = (i % 3 == 1) ? -(i * 7 + 1) : (i * 5 + 2);
      mem_write(XB + i, xv[i]);
      mem_write(YB + i, SENT + i);
      mem_write(ZB + i, SENT + i);
    end
    start = 1; @(negedge clk); start = 0;
    t0 = $time;
    wait (done);
    repeat (30) @(negedge clk);   // let the last stores drain
    $display("run_cycles=%0d", run_cycles);
    for (int i = 0; i < N; i++) begin
      mem_read(YB + i, v);
      chk(v == ((xv[i] < 0) ? xv[i] + 100 : SENT + i), $sformatf("Y[%0d]=%0d", i, v));
      mem_read(ZB + i, v);
      chk(v == ((xv[i] < 0) ? SENT + i : 3 * xv[i]), $sformatf("Z[%0d]=%0d", i, v));
    end
    $display("events: proactive=%0d branch=%0d taken=%0d cont=%0d end=%0d reuse=%0d push=%0d pop=%0d conflict=%0d stall=%0d bcast=%0d stores=%0d ovf=%0d",
             c_pro, c_br, c_taken, c_cont, c_end, c_reuse, c_push, c_pop, c_conf, c_stall, c_bcast, c_st, c_ovf);
    chk(c_br == R * N, "branch tokens: one per item");
    chk(c_pro == R * N, "proactive emissions by PE3: one per item");
    chk(c_taken > 0 && c_taken < R * N, "both branch directions taken");
    chk(c_cont == R * N + (R - 1), "loop continue: inner R*N + outer R-1");
    chk(c_end == R + 2, "loop ends: R inner + outer + finish");
    chk(c_reuse > 0, "configuration reuse (check phase)");
    chk(c_push == R, "control FIFO pushes");
    chk(c_pop == R, "control FIFO pops");
    chk(c_bcast > 0, "CS broadcast reached PE5");
    chk(c_conf > 0 && c_stall > 0, "bank conflicts and PE stalls");
    chk(c_st == R * N, "stores");
    chk(c_ovf == 0, "no queue overflow");
    chk(run_cycles < R * (N + 16), $sformatf("run time %0d cycles", run_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
