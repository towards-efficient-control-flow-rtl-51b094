// Synchronous FIFO used as the PE input buffers and token queues.
//
// DEPTH entries of a WIDTH-bit word, one write and one read per cycle.
// With FALLTHROUGH=1 an empty FIFO presents the word being written in the
// same cycle at its output, so a consumer can take it with no added cycle;
// the word is stored only if it is not taken.  A write to a full FIFO is
// dropped and raises `overflow` for that cycle.
//
// A generic helper of this design (the source only speaks of buffers and
// queues, not of their construction).
module sync_fifo #(
  parameter int unsigned WIDTH       = 8,
  parameter int unsigned DEPTH       = 4,
  parameter bit          FALLTHROUGH = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,   // no word available at rd_data
  output logic             full,
  output logic             overflow
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [PW:0]      count;
  logic             stored_empty, bypass, do_wr, do_rd;

  assign stored_empty = (count == '0);
  assign full         = (count == (PW+1)'(DEPTH));
  assign bypass       = FALLTHROUGH && stored_empty && wr_en;
  assign empty        = stored_empty && !bypass;
  assign rd_data      = stored_empty ? wr_data : mem[rd_ptr];
  assign do_rd        = rd_en && !stored_empty;
  assign do_wr        = wr_en && !full && !(bypass && rd_en);
  assign overflow     = wr_en && full && !do_rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr || (wr_en && full && do_rd)) begin
        mem[wr_ptr] <= wr_data;
        wr_ptr      <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (do_rd)
        rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(do_wr || (wr_en && full && do_rd)) - (PW+1)'(do_rd);
    end
  end
endmodule
