// Marionette controller.
//
// On `start` it copies a program from the instruction scratchpad into the
// array: the instruction buffers of all PEs (words 0..NUM_PE*IB_DEPTH-1),
// then the control network configuration (the next NET_WORDS words), then
// the start word.  It then injects up to two start tokens into the control
// network on its two outputs, and from then on the PEs run on their own:
// the controller only watches its two control network inputs and finishes
// when a token with the all-ones address (DONE_ADDR) arrives.  `done`
// stays high until the next `start`; `run_cycles` counts the cycles from
// the start tokens to the done token.
// Timing: one scratchpad word per cycle, read one cycle ahead, so loading
// takes NUM_PE*IB_DEPTH + NET_WORDS + 2 cycles.  The load order, program
// layout and done convention are this design's choices; the source names
// the controller and its place on the control network.
module controller
  import marionette_pkg::*;
#(
  localparam int unsigned NET_WORDS = (NET_CFG_W + INST_W - 1) / INST_W,
  localparam int unsigned IB_WORDS  = NUM_PE * IB_DEPTH,
  localparam int unsigned LAST      = IB_WORDS + NET_WORDS   // start word
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           run_cycles,
  // instruction scratchpad read port
  output logic                  imem_re,
  output logic [IMEM_AW-1:0]    imem_raddr,
  input  logic [INST_W-1:0]     imem_rdata,
  // instruction buffer load bus
  output logic [NUM_PE-1:0]     ib_we,
  output logic [ADDR_W-1:0]     ib_waddr,
  output inst_t                 ib_wdata,
  // network configuration
  output logic [NET_CFG_W-1:0]  net_cfg,
  // control network ports
  output token_t                ctrl_out [2],
  input  token_t                ctrl_in  [2]
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_START, S_RUN, S_DONE} state_e;
  state_e             state;
  logic [IMEM_AW:0]   rd_idx, wr_idx;
  logic               wr_v;
  logic [NET_WORDS*INST_W-1:0] net_q;
  logic [7:0]         start_word;

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);
  assign net_cfg = net_q[NET_CFG_W-1:0];
  assign imem_re    = (state == S_LOAD) && (rd_idx <= (IMEM_AW+1)'(LAST));
  assign imem_raddr = rd_idx[IMEM_AW-1:0];

  // instruction buffer writes, one cycle after the read
  always_comb begin
    ib_we    = '0;
    ib_waddr = wr_idx[ADDR_W-1:0];
    ib_wdata = inst_t'(imem_rdata);
    if (wr_v && wr_idx < (IMEM_AW+1)'(IB_WORDS))
      ib_we[wr_idx[ADDR_W +: $clog2(NUM_PE)]] = 1'b1;
  end

  always_comb begin
    ctrl_out[0] = '0;
    ctrl_out[1] = '0;
    if (state == S_START) begin
      ctrl_out[0] = '{valid: start_word[3], addr: start_word[2:0]};
      ctrl_out[1] = '{valid: start_word[7], addr: start_word[6:4]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      rd_idx     <= '0;
      wr_idx     <= '0;
      wr_v       <= 1'b0;
      net_q      <= '0;
      start_word <= '0;
      run_cycles <= '0;
    end else begin
      wr_v   <= imem_re;
      wr_idx <= rd_idx;
      if (imem_re) rd_idx <= rd_idx + 1'b1;
      if (wr_v && wr_idx >= (IMEM_AW+1)'(IB_WORDS) && wr_idx < (IMEM_AW+1)'(LAST))
        net_q[(int'(wr_idx) - IB_WORDS) * INST_W +: INST_W] <= imem_rdata;
      if (wr_v && wr_idx == (IMEM_AW+1)'(LAST))
        start_word <= imem_rdata[7:0];
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state  <= S_LOAD;
          rd_idx <= '0;
        end
        S_LOAD: if (wr_v && wr_idx == (IMEM_AW+1)'(LAST)) state <= S_START;
        S_START: begin
          state      <= S_RUN;
          run_cycles <= '0;
        end
        S_RUN: begin
          run_cycles <= run_cycles + 1;
          if ((ctrl_in[0].valid && ctrl_in[0].addr == DONE_ADDR) ||
              (ctrl_in[1].valid && ctrl_in[1].addr == DONE_ADDR))
            state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
