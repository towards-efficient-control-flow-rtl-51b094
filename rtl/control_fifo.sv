// Control FIFO: stores control tokens produced ahead of time.
//
// An outer-loop pipeline can run ahead of the inner loop and leave its
// decisions (the instruction addresses of what to run next) here, so the
// inner-loop PEs do not have to switch back to the outer basic block
// between rounds.  Two push ports take tokens from the control network
// (port A is stored first if both arrive together).  A token arriving on
// `pop` is a request: the oldest stored token is sent on `out` in the next
// cycle.  A request that finds the FIFO empty is remembered and served as
// soon as a token is pushed.  This request/answer protocol and the depth
// are this design's choices; the source gives the FIFO's purpose and its
// place on the control network.
module control_fifo
  import marionette_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t push_a,
  input  token_t push_b,
  input  token_t pop,
  output token_t out,
  output logic   overflow,
  output logic   ev_push,
  output logic   ev_pop
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [ADDR_W-1:0] mem [DEPTH];
  logic [PW-1:0]     wp, rp;
  logic [PW:0]       cnt, pend;
  logic [1:0]        n_push;
  logic              serve, avail_a;

  assign avail_a = (cnt != '0);
  // serve a pending or new request if a stored token exists
  assign serve   = avail_a && ((pend != '0) || pop.valid);
  assign n_push  = 2'(push_a.valid) + 2'(push_b.valid);
  assign ev_push = |n_push;
  assign ev_pop  = serve;
  assign overflow = (32'(cnt) + 32'(n_push) - 32'(serve)) > DEPTH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; pend <= '0; out <= '0;
    end else begin
      out <= '0;
      if (serve) begin
        out <= '{valid: 1'b1, addr: mem[rp]};
        rp  <= rp + 1'b1;
      end
      if (push_a.valid && push_b.valid) begin
        mem[wp]       <= push_a.addr;
        mem[wp + 1'b1] <= push_b.addr;
        wp <= wp + 2'd2;
      end else if (push_a.valid) begin
        mem[wp] <= push_a.addr;
        wp <= wp + 1'b1;
      end else if (push_b.valid) begin
        mem[wp] <= push_b.addr;
        wp <= wp + 1'b1;
      end
      cnt  <= cnt + (PW+1)'(n_push) - (PW+1)'(serve);
      pend <= pend + (PW+1)'(pop.valid) - (PW+1)'(serve);
    end
  end
endmodule
