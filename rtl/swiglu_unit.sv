// swiglu_unit: special-function unit for the SwiGLU activation of the FFN.
//
// The LUTLinear engine runs the gate and the up projection one after the
// other, so the unit first receives the gate projection, applies the
// sigmoid-weighted linear unit silu(g) = g * sigmoid(g) = g / (1 + exp(-g))
// and keeps the result in its gate buffer; it then receives the up
// projection and emits the element-wise product silu(g) * u for the same
// (token, column). LANES values are handled per beat.
//
// Interface: one input stream with a destination field (DEST_SWI_GATE or
// DEST_SWI_UP), token and first column of the beat; one output stream with
// token and column. Both use valid/ready.
// Timing: a gate beat is absorbed in one cycle; an up beat produces an
// output beat one cycle later; the unit stalls only through out_ready.
// The SiLU-then-product structure follows the source architecture; the
// buffering of the gate operand and the FP32 approximations of exp and
// reciprocal are this design's choices.
module swiglu_unit
  import fp32_pkg::*;
  import lut_llm_pkg::*;
#(
  parameter int unsigned LANES   = 16,
  parameter int unsigned COLS    = 6144,   // FFN intermediate size
  parameter int unsigned TOK_MAX = 128,
  localparam int unsigned TK_W  = $clog2(TOK_MAX + 1),
  localparam int unsigned COL_W = $clog2(COLS),
  localparam int unsigned BPT   = COLS / LANES,          // beats per token
  localparam int unsigned A_W   = $clog2(TOK_MAX * BPT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  dest_e                in_dest,
  input  logic [TK_W-1:0]      in_tok,
  input  logic [COL_W-1:0]     in_col,
  input  fp32_t [LANES-1:0]    in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [TK_W-1:0]      out_tok,
  output logic [COL_W-1:0]     out_col,
  output fp32_t [LANES-1:0]    out_data
);

  fp32_t [LANES-1:0] gate_buf [TOK_MAX * BPT];
  logic  [A_W-1:0]   addr;
  fp32_t [LANES-1:0] silu;

  assign addr     = A_W'(32'(in_tok) * BPT + 32'(in_col) / LANES);
  assign in_ready = !out_valid || out_ready;

  always_comb begin
    for (int i = 0; i < LANES; i++)
      silu[i] = fp_mul(in_data[i], fp_recip(fp_add(FP_ONE, fp_exp(fp_neg(in_data[i])))));
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && in_dest == DEST_SWI_GATE) gate_buf[addr] <= silu;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid && in_dest == DEST_SWI_UP;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && in_dest == DEST_SWI_UP) begin
      for (int i = 0; i < LANES; i++) out_data[i] <= fp_mul(gate_buf[addr][i], in_data[i]);
      out_tok <= in_tok;
      out_col <= in_col;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> (in_dest == DEST_SWI_GATE || in_dest == DEST_SWI_UP))
    else $error("swiglu_unit: beat with a foreign destination");

endmodule
