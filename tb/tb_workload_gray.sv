// Gray-scale conversion on the full-size array: y[i] = (77 r + 150 g + 29 b) >> 8.
//
// The benchmark list of the design's evaluation includes gray processing
// of 16384 pixels; 16384 pixels of three colours do not fit the 4096-word
// data scratchpad, so this bench converts NPIX = 1000 pixels (4000 words).
// One basic block, all 16 PEs, one item per cycle:
//
//   PE0  loop i = 0..NPIX-1         PE1  LD r = R[i]     PE2  r*77     PE3  pass
//   PE4  pass i                     PE5  LD g = G[i]     PE6  g*150    PE7  r*77 + g*150
//   PE8  pass i                     PE9  LD b = B[i]     PE10 b*29     PE11 + b*29
//   PE12 pass i                     PE13 pass i          PE14 ST Y[i]  PE15 >> 8
//
// PE0's continue token is spread by CS network 0 onto lines 1..15, so one
// token per iteration reaches every other PE; from the second iteration on
// they find the same address and reuse their configuration (check phase).
// The three loads trail each other by one cycle, so with R, G, B on the
// same bank alignment they use three different banks every cycle; Y is
// placed on the fourth.  Checks every output word, the run time against
// one item per cycle, configuration reuse, and that no queue overflowed.
module tb_workload_gray;
  import marionette_pkg::*;
  import benes_route_pkg::*;

  localparam int NPIX = 1000;
  localparam int RB = 0, GB = 1000, BB = 2000, YB = 3000 + 3;   // YB chosen for the store's bank slot
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

  int c_reuse = 0, c_conf = 0, c_ovf = 0, c_st = 0;
  always @(posedge clk) if (rst_n) begin
    c_reuse += $countones(ev_reuse);
    c_conf  += int'(ev_bank_conflict);
    c_ovf   += int'(ev_overflow);
    c_st    += int'(ev_fire[14]);
  end

  logic [INST_W-1:0] prog [IMEM_WORDS];

  function automatic inst_t op(op_e o, src_e a, src_e b, int imm);
    inst_t x = '0;
    x.mode = MODE_DFG; x.op = o; x.src_a = a; x.src_b = b; x.imm = 16'(imm); x.out_en = 1;
    return x;
  endfunction

  task automatic build_program();
    inst_t x [NUM_PE];
    int map[];
    logic [NET_CFG_W-1:0] nc;
    logic [NETW*64-1:0] ncw;
    foreach (prog[i]) prog[i] = '0;
    x[0] = '0; x[0].mode = MODE_LOOP; x[0].src_b = SRC_IMM; x[0].imm = 16'(NPIX); x[0].step = 1;
    x[0].out_en = 1; x[0].emit = 1; x[0].addr_t = 0; x[0].addr_f = DONE_ADDR;
    x[1]  = op(OP_LD,   SRC_W, SRC_NONE, RB);
    x[2]  = op(OP_MUL,  SRC_W, SRC_IMM, 77);
    x[3]  = op(OP_PASS, SRC_W, SRC_NONE, 0);
    x[4]  = op(OP_PASS, SRC_N, SRC_NONE, 0);
    x[5]  = op(OP_LD,   SRC_W, SRC_NONE, GB);
    x[6]  = op(OP_MUL,  SRC_W, SRC_IMM, 150);
    x[7]  = op(OP_ADD,  SRC_W, SRC_N, 0);
    x[8]  = op(OP_PASS, SRC_N, SRC_NONE, 0);
    x[9]  = op(OP_LD,   SRC_W, SRC_NONE, BB);
    x[10] = op(OP_MUL,  SRC_W, SRC_IMM, 29);
    x[11] = op(OP_ADD,  SRC_W, SRC_N, 0);
    x[12] = op(OP_PASS, SRC_N, SRC_NONE, 0);
    x[13] = op(OP_PASS, SRC_W, SRC_NONE, 0);
    x[14] = op(OP_ST,   SRC_W, SRC_E, YB); x[14].out_en = 0;
    x[15] = op(OP_SHR,  SRC_N, SRC_IMM, 8);
    for (int p = 0; p < NUM_PE; p++) prog[p * 8] = INST_W'(x[p]);
    // network: CS0 spreads line 0 over lines 0..15; lines 1..15 -> PE inputs 1..15;
    // controller output 0 -> PE0; PE0 port 1 (loop end) -> controller
    map = new[CNET_N];
    foreach (map[i]) map[i] = -1;
    for (int p = 1; p < NUM_PE; p++) map[p] = p;
    map[NI_CTRL] = 0;
    map[CS_N] = NO_CTRL;
    begin
      int nxt = NO_EXT;
      for (int i = 0; i < CNET_N; i++)
        if (map[i] < 0 && nxt < CNET_N) begin map[i] = nxt; nxt++; end
    end
    route_partial(CNET_N, map);
    nc = '0;
    for (int b = 0; b < BENES_CFG_W; b++) nc[b] = cfgbits[b];
    for (int s = 0; s < 4; s++)
      for (int i = (1 << s); i < (2 << s); i++) nc[BENES_CFG_W + s*CS_N + i] = 1'b1;
    ncw = '0; ncw[NET_CFG_W-1:0] = nc;
    for (int w = 0; w < NETW; w++) prog[128 + w] = ncw[w*64 +: 64];
    prog[128 + NETW] = 64'h08;   // start token: address 0 on controller output 0
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
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int r [NPIX], g [NPIX], b [NPIX];
    int v;
    host_mem_req = '0;
    foreach (ext_ctrl_in[i]) ext_ctrl_in[i] = '0;
    imem_waddr = '0; imem_wdata = '0;
    build_program();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 142; a++) begin
      imem_we = 1; imem_waddr = IMEM_AW'(a); imem_wdata = prog[a]; @(negedge clk);
    end
    imem_we = 0;
    for (int i = 0; i < NPIX; i++) begin
      r[i] = $urandom_range(0, 255); g[i] = $urandom_range(0, 255); b[i] = $urandom_range(0, 255);
      mem_write(RB + i, r[i]); mem_write(GB + i, g[i]); mem_write(BB + i, b[i]);
    end
    start = 1; @(negedge clk); start = 0;
    wait (done);
    repeat (20) @(negedge clk);
    $display("run_cycles=%0d reuse=%0d conflicts=%0d overflow=%0d stores=%0d", run_cycles, c_reuse, c_conf, c_ovf, c_st);
    for (int i = 0; i < NPIX; i++) begin
      mem_read(YB + i, v);
      chk(v == ((77 * r[i] + 150 * g[i] + 29 * b[i]) >> 8), $sformatf("Y[%0d]=%0d", i, v));
    end
    chk(c_st == NPIX, "one store per pixel");
    chk(c_ovf == 0, "no queue overflow");
    chk(c_reuse >= 15 * (NPIX - 1), "configuration reused by the 15 broadcast receivers");
    chk(run_cycles <= NPIX + 16, $sformatf("one pixel per cycle: %0d cycles", run_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
