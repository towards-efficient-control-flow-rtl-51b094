// Marionette: a 4x4 spatial array with a separate control flow plane.
//
// Data flow plane: 16 PEs on a nearest-neighbour data mesh, a memory
// access interconnect and a 16 KB banked data scratchpad.  Control flow
// plane: the control flow part of every PE, the CS-Benes control network,
// eight control FIFOs and the controller with its 2 KB instruction
// scratchpad.  Control flows as instruction addresses: a PE that decides
// what runs next (a branch or loop PE, or a PE forwarding its own basic
// block proactively) sends the address straight to the PEs that must
// switch, in one network cycle, without a central unit in the loop.
//
// Host interface: write the instruction scratchpad (`imem_*`), read and
// write the data scratchpad (`host_mem_*`, served ahead of the PEs), pulse
// `start`, wait for `done`.  The spare control network lines (the
// source's "scalable interface") are brought out as `ext_ctrl_in/out`.
// Per-cycle event lines (`ev_*`) expose what the mechanisms did.
module marionette_top
  import marionette_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction scratchpad write port
  input  logic                 imem_we,
  input  logic [IMEM_AW-1:0]   imem_waddr,
  input  logic [INST_W-1:0]    imem_wdata,
  // data scratchpad host port
  input  mem_req_t             host_mem_req,
  output logic                 host_mem_gnt,
  output logic [DATA_W-1:0]    host_mem_rdata,
  // run control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          run_cycles,
  // scalable control interface
  input  token_t               ext_ctrl_in  [N_EXT_IN],
  output token_t               ext_ctrl_out [N_EXT_OUT],
  // events (one bit per source per cycle)
  output logic [NUM_PE-1:0]    ev_fire,
  output logic [NUM_PE-1:0]    ev_proactive,
  output logic [NUM_PE-1:0]    ev_branch,
  output logic [NUM_PE-1:0]    ev_loop_cont,
  output logic [NUM_PE-1:0]    ev_loop_end,
  output logic [NUM_PE-1:0]    ev_reuse,
  output logic [NUM_PE-1:0]    ev_mem_stall,
  output logic [N_CFIFO-1:0]   ev_cfifo_push,
  output logic [N_CFIFO-1:0]   ev_cfifo_pop,
  output logic                 ev_bank_conflict,
  output logic                 ev_overflow
);
  localparam int unsigned BAW = DMEM_AW - $clog2(NBANKS);

  // ---------------- control flow plane ----------------
  token_t            net_in [CNET_N], net_out [CNET_N];
  logic [NET_CFG_W-1:0] net_cfg;
  token_t            pe_cout [NUM_PE][2], pe_cin [NUM_PE][2];
  token_t            ctl_out [2], ctl_in [2];
  token_t            cf_out [N_CFIFO];
  logic [N_CFIFO-1:0] cf_ovf;
  logic [NUM_PE-1:0] ib_we, pe_ovf;
  logic [ADDR_W-1:0] ib_waddr;
  inst_t             ib_wdata;
  logic              imem_re;
  logic [IMEM_AW-1:0] imem_raddr;
  logic [INST_W-1:0] imem_rdata;

  inst_memory u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .re(imem_re), .raddr(imem_raddr), .rdata(imem_rdata));

  controller u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .run_cycles,
    .imem_re, .imem_raddr, .imem_rdata,
    .ib_we, .ib_waddr, .ib_wdata, .net_cfg,
    .ctrl_out(ctl_out), .ctrl_in(ctl_in));

  control_network u_cnet (.clk, .rst_n, .cfg(net_cfg), .in_tok(net_in), .out_tok(net_out));

  for (genvar p = 0; p < NUM_PE; p++) begin : g_cmap
    assign net_in[p]          = pe_cout[p][0];
    assign net_in[CS_N + p]   = pe_cout[p][1];
    assign pe_cin[p][0]       = net_out[p];
    assign pe_cin[p][1]       = net_out[CS_N + p];
  end
  for (genvar k = 0; k < 2; k++) begin : g_cctl
    assign net_in[NI_CTRL + k] = ctl_out[k];
    assign ctl_in[k]           = net_out[NO_CTRL + k];
  end
  for (genvar f = 0; f < N_CFIFO; f++) begin : g_cfifo
    assign net_in[NI_CFIFO + f] = cf_out[f];
    control_fifo u_cf (
      .clk, .rst_n,
      .push_a(net_out[NO_PUSHA + f]), .push_b(net_out[NO_PUSHB + f]), .pop(net_out[NO_POP + f]),
      .out(cf_out[f]), .overflow(cf_ovf[f]), .ev_push(ev_cfifo_push[f]), .ev_pop(ev_cfifo_pop[f]));
  end
  for (genvar e = 0; e < N_EXT_IN; e++) begin : g_ein
    assign net_in[NI_EXT + e] = ext_ctrl_in[e];
  end
  for (genvar e = 0; e < N_EXT_OUT; e++) begin : g_eout
    assign ext_ctrl_out[e] = net_out[NO_EXT + e];
  end

  // ---------------- data flow plane ----------------
  dword_t            pe_dout [NUM_PE];
  dword_t            pe_din  [NUM_PE][4];
  mem_req_t          pe_mreq [NUM_PE];
  logic [NUM_PE-1:0] pe_mgnt;
  logic [DATA_W-1:0] pe_mrdata [NUM_PE];
  logic [NBANKS-1:0] bank_req, bank_we;
  logic [BAW-1:0]    bank_addr  [NBANKS];
  logic [DATA_W-1:0] bank_wdata [NBANKS], bank_rdata [NBANKS];

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    marionette_pe u_pe (
      .clk, .rst_n,
      .ib_we(ib_we[p]), .ib_waddr, .ib_wdata,
      .ctrl_in(pe_cin[p]), .ctrl_out(pe_cout[p]),
      .din(pe_din[p]), .dout(pe_dout[p]),
      .mem_req(pe_mreq[p]), .mem_gnt(pe_mgnt[p]), .mem_rdata(pe_mrdata[p]),
      .ev_fire(ev_fire[p]), .ev_proactive(ev_proactive[p]), .ev_branch(ev_branch[p]),
      .ev_loop_cont(ev_loop_cont[p]), .ev_loop_end(ev_loop_end[p]), .ev_reuse(ev_reuse[p]),
      .ev_mem_stall(ev_mem_stall[p]), .ev_overflow(pe_ovf[p]));
  end

  data_mesh u_mesh (.clk, .rst_n, .pe_out(pe_dout), .pe_in(pe_din));

  mem_interconnect u_mic (
    .clk, .rst_n,
    .pe_req(pe_mreq), .pe_gnt(pe_mgnt), .pe_rdata(pe_mrdata),
    .host_req(host_mem_req), .host_gnt(host_mem_gnt), .host_rdata(host_mem_rdata),
    .bank_req, .bank_we, .bank_addr, .bank_wdata, .bank_rdata,
    .ev_conflict(ev_bank_conflict));

  data_sram u_dmem (
    .clk, .req(bank_req), .we(bank_we), .addr(bank_addr), .wdata(bank_wdata), .rdata(bank_rdata));

  assign ev_overflow = (|pe_ovf) || (|cf_ovf);
endmodule
