// Testbench for cf_trigger: buffer load, one-cycle configuration phase,
// reuse of the decoded configuration for a repeated address (check phase),
// re-read after the buffer entry is rewritten, and the hold rules of
// once-mode and loop-mode configurations.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_cf_trigger;
  import marionette_pkg::*;
  logic clk = 0, rst_n = 0, ib_we, ready, release_cfg, cfg_valid, cfg_new, reused;
  logic [ADDR_W-1:0] ib_waddr, cur_addr;
  inst_t ib_wdata, cfg;
  logic [3:0] dir_used;
  token_t tok;
  int checks = 0, failures = 0;

  cf_trigger dut (.clk, .rst_n, .ib_we, .ib_waddr, .ib_wdata, .tok, .ready, .release_cfg,
                  .cfg, .cfg_valid, .cfg_new, .reused, .cur_addr, .dir_used);
  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic inst_t mk(int i, mode_e m, logic once);
    inst_t x = '0;
    x.imm = 16'(100 + i); x.mode = m; x.once = once; x.op = OP_ADD;
    return x;
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (imm=%0d v=%0d new=%0d reused=%0d ready=%0d)",
                                       what, cfg.imm, cfg_valid, cfg_new, reused, ready); end
  endtask

  task automatic send(input int a);
    tok = '{1'b1, ADDR_W'(a)};
    @(negedge clk);
    tok = '0;
  endtask

  initial begin
    ib_we = 0; tok = '0; release_cfg = 0; ib_waddr = '0; ib_wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < IB_DEPTH; i++) begin
      ib_we = 1; ib_waddr = ADDR_W'(i);
      ib_wdata = mk(i, (i == 5) ? MODE_LOOP : MODE_DFG, i == 3);
      @(negedge clk);
    end
    ib_we = 0;
    chk(!cfg_valid && ready, "idle after reset");
    send(2);
    chk(cfg_valid && cfg_new && !reused && cfg.imm == 102, "config phase addr 2");
    @(negedge clk);
    chk(cfg_valid && !cfg_new && cfg.imm == 102, "config held");
    send(2);
    chk(cfg_new && reused && cfg.imm == 102, "same address reused");
    // rewrite entry 2: the next token for 2 must read the buffer again
    ib_we = 1; ib_waddr = 2; ib_wdata = mk(50, MODE_DFG, 0); @(negedge clk); ib_we = 0;
    send(2);
    chk(cfg_new && !reused && cfg.imm == 150, "re-read after rewrite");
    // stream config is replaced right away
    send(1);
    chk(cfg.imm == 101 && cur_addr == 1, "stream replaced");
    // once config holds until release
    send(3);
    chk(cfg.imm == 103 && cfg.once, "once config");
    tok = '{1'b1, 3'd4};
    #1 chk(!ready, "once holds");
    @(negedge clk);
    chk(cfg.imm == 103, "still once config");
    release_cfg = 1;
    #1 chk(ready, "release opens");
    @(negedge clk); release_cfg = 0; tok = '0;
    chk(cfg.imm == 104 && cfg_new, "accepted after release");
    // loop config holds until loop end
    send(5);
    chk(cfg.mode == MODE_LOOP, "loop config");
    tok = '{1'b1, 3'd6};
    repeat (3) begin #1 chk(!ready, "loop holds"); @(negedge clk); end
    release_cfg = 1; @(negedge clk); release_cfg = 0; tok = '0;
    chk(cfg.imm == 106, "after loop end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
