// act_buffer: the global on-chip activation buffer.
//
// Holds FP32 activations of up to TOK_MAX tokens x D_MAX features as
// LANES-wide words. The special-function units and the attention engine
// write their results into it (token, first column, LANES values); the
// LUTLinear engine reads it back as its input when a projection takes its
// activations from on chip rather than from off-chip memory. A read returns
// the LANES values starting at column beat*LANES of a token, which is
// exactly the N_PAIRS activation vectors of one pass when
// LANES = N_PAIRS * V.
//
// Interface: one write port, one combinational read port.
// Timing: a write is visible to a read in the next cycle.
// The source architecture shows a global on-chip buffer between the
// LUTLinear engine and the special-function units; its organisation here
// is this design's choice.
module act_buffer
  import fp32_pkg::*;
#(
  parameter int unsigned LANES   = 16,
  parameter int unsigned D_MAX   = 6144,
  parameter int unsigned TOK_MAX = 128,
  localparam int unsigned TK_W  = $clog2(TOK_MAX + 1),
  localparam int unsigned COL_W = $clog2(D_MAX),
  localparam int unsigned BPT   = D_MAX / LANES,
  localparam int unsigned BT_W  = $clog2(BPT),
  localparam int unsigned A_W   = $clog2(TOK_MAX * BPT)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [TK_W-1:0]   wr_tok,
  input  logic [COL_W-1:0]  wr_col,
  input  fp32_t [LANES-1:0] wr_data,
  input  logic [TK_W-1:0]   rd_tok,
  input  logic [BT_W-1:0]   rd_beat,
  output fp32_t [LANES-1:0] rd_data
);

  fp32_t [LANES-1:0] mem [TOK_MAX * BPT];

  always_ff @(posedge clk) begin
    if (wr_en) mem[A_W'(32'(wr_tok) * BPT + 32'(wr_col) / LANES)] <= wr_data;
  end

  assign rd_data = mem[A_W'(32'(rd_tok) * BPT + 32'(rd_beat))];

endmodule
