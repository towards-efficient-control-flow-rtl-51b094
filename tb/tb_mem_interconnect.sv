// Testbench for mem_interconnect with a behavioural bank model (bank b,
// local word w reads as b*10000+w, one-cycle latency).  Checks: requests to
// different banks are all granted in one cycle; the host wins its bank;
// PEs competing for one bank are granted in round-robin order; read data
// returns to the right PE one cycle later; a conflict is reported; write
// requests reach the bank with the local address.
//
// Stimuli and expected values are this bench's own; the expected values
// are worked out here from the behaviour described in the block's header,
// not taken from the block.
module tb_mem_interconnect;
  import marionette_pkg::*;
  localparam int NB = NBANKS, BAW = DMEM_AW - 2;
  logic clk = 0, rst_n = 0, host_gnt, ev_conflict;
  mem_req_t pe_req [16], host_req;
  logic [15:0] pe_gnt;
  logic [31:0] pe_rdata [16], host_rdata;
  logic [NB-1:0] bank_req, bank_we;
  logic [BAW-1:0] bank_addr [NB];
  logic [31:0] bank_wdata [NB], bank_rdata [NB];
  int checks = 0, failures = 0;

  mem_interconnect dut (.clk, .rst_n, .pe_req, .pe_gnt, .pe_rdata, .host_req, .host_gnt, .host_rdata,
                        .bank_req, .bank_we, .bank_addr, .bank_wdata, .bank_rdata, .ev_conflict);
  always #5 clk = ~clk;
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (bank_req[b] && !bank_we[b]) bank_rdata[b] <= 32'(b * 10000 + int'(bank_addr[b]));

  initial begin
    repeat (500) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s (gnt=%b host=%0d)", what, pe_gnt, host_gnt); end
  endtask

  function automatic mem_req_t rd(int a); return '{1'b1, 1'b0, DMEM_AW'(a), 32'd0}; endfunction

  initial begin
    int order[$];
    host_req = '0;
    for (int i = 0; i < 16; i++) pe_req[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // four PEs, four different banks
    pe_req[0] = rd(40); pe_req[3] = rd(41); pe_req[7] = rd(42); pe_req[9] = rd(43);
    #1 chk(pe_gnt == 16'h0289 && !ev_conflict, "distinct banks all granted");
    @(negedge clk);
    for (int i = 0; i < 16; i++) pe_req[i] = '0;
    chk(pe_rdata[0] == 10 && pe_rdata[3] == 10010 && pe_rdata[7] == 20010 && pe_rdata[9] == 30010, "read data steering");
    // host and a PE on the same bank
    host_req = rd(8); pe_req[2] = rd(12);
    #1 chk(host_gnt && !pe_gnt[2] && ev_conflict, "host priority");
    @(negedge clk); host_req = '0;
    chk(host_rdata == 2, "host read data");
    #1 chk(pe_gnt[2], "PE granted after host");
    @(negedge clk); pe_req[2] = '0;
    // round robin among PEs 1, 5, 6 on bank 1
    pe_req[1] = rd(1); pe_req[5] = rd(5); pe_req[6] = rd(9);
    for (int k = 0; k < 6; k++) begin
      #1;
      for (int i = 0; i < 16; i++) if (pe_gnt[i]) order.push_back(i);
      @(negedge clk);
    end
    checks++;
    if (order.size() != 6 || order[0] == order[1] || order[1] == order[2] || order[0] == order[2] ||
        order[3] != order[0] || order[4] != order[1] || order[5] != order[2]) begin
      failures++; $display("FAIL round robin %p", order);
    end
    for (int i = 0; i < 16; i++) pe_req[i] = '0;
    // write goes to the bank with its local address
    pe_req[4] = '{1'b1, 1'b1, DMEM_AW'(14), 32'hABCD};
    #1 chk(bank_req[2] && bank_we[2] && bank_addr[2] == 3 && bank_wdata[2] == 32'hABCD, "write routing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
