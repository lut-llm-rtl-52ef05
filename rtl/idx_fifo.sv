// idx_fifo: centroid index FIFO between a BPCSU and its 2D-PSum engine.
//
// A plain synchronous first-in first-out queue. The BPCSU side pushes one
// activation-centroid index per search result; the 2D-PSum side pops an
// index once it has used it for every output group of the projection. The
// FIFO absorbs the skew between the parallel BPCSUs, which all finish a
// token in the same cycle, and the serially cascaded 2D-PSum engines, which
// consume it a few cycles apart.
//
// Interface: push/push_data (ignored when full), pop (ignored when empty),
// head data on pop_data while not empty, count of stored entries.
// Timing: a pushed entry is visible at the head one cycle later.
// The source architecture only names this FIFO; depth and the
// show-ahead behaviour are this design's choices.
module idx_fifo #(
  parameter int unsigned W     = 6,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] pop_data,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign empty    = (count == 0);
  assign full     = (count == (AW+1)'(DEPTH));
  assign pop_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // a push into a full FIFO or a pop from an empty one is a protocol error
  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("idx_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("idx_fifo: pop while empty");

endmodule
