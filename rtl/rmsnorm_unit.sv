// rmsnorm_unit: special-function unit for the residual connection and
// RMSNorm (the "LayerNorm" unit of the accelerator).
//
// For each token the unit receives the H values of a projection output
// (attention output projection or FFN down projection) as LANES-wide beats.
// It adds them to the residual stream it keeps (when cfg_add_residual is
// set; otherwise the input itself becomes the residual, as for the input
// embeddings), stores the new residual, and accumulates the sum of squares.
// When the row is complete it computes r = 1/sqrt(sum/H + eps) and streams
// the row out again as h * r * gamma, which is the input of the next
// linear projection.
//
// Interface: gamma_we/gamma_addr/gamma_data load the LANES-wide gamma beats;
// input and output streams are valid/ready with token and column fields;
// cfg_cols is the row length H (a multiple of LANES).
// Timing: H/LANES input cycles, one cycle for the scale, then H/LANES output
// cycles per token; inputs are held off (in_ready low) while a row is
// normalised. The ordering residual-add-then-normalise, the buffering and
// the FP32 approximations are this design's choices; the source
// architecture names an RMSNorm and a residual stage.
module rmsnorm_unit
  import fp32_pkg::*;
#(
  parameter int unsigned LANES   = 16,
  parameter int unsigned H_MAX   = 2048,
  parameter int unsigned TOK_MAX = 128,
  parameter logic [31:0] EPS     = 32'h358637BD,   // 1e-6
  localparam int unsigned TK_W  = $clog2(TOK_MAX + 1),
  localparam int unsigned COL_W = $clog2(H_MAX),
  localparam int unsigned BPT   = H_MAX / LANES,
  localparam int unsigned A_W   = $clog2(TOK_MAX * BPT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [COL_W:0]       cfg_cols,
  input  logic                 cfg_add_residual,
  input  logic                 gamma_we,
  input  logic [$clog2(BPT)-1:0] gamma_addr,
  input  fp32_t [LANES-1:0]    gamma_data,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [TK_W-1:0]      in_tok,
  input  logic [COL_W-1:0]     in_col,
  input  fp32_t [LANES-1:0]    in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [TK_W-1:0]      out_tok,
  output logic [COL_W-1:0]     out_col,
  output fp32_t [LANES-1:0]    out_data
);

  typedef enum logic [1:0] {R_IN, R_SCALE, R_OUT} rstate_e;

  fp32_t [LANES-1:0] res_buf [TOK_MAX * BPT];
  fp32_t [LANES-1:0] gamma   [BPT];

  rstate_e           st;
  fp32_t             ssq, rs;
  logic [TK_W-1:0]   tok;
  logic [COL_W:0]    ocol;
  fp32_t [LANES-1:0] h;
  fp32_t             beat_ssq;
  logic [A_W-1:0]    waddr, raddr;
  logic              in_fire, row_end;

  assign in_ready = (st == R_IN);
  assign in_fire  = in_valid && in_ready;
  assign waddr    = A_W'(32'(in_tok) * BPT + 32'(in_col) / LANES);
  assign raddr    = A_W'(32'(tok) * BPT + 32'(ocol) / LANES);
  assign row_end  = (32'(in_col) + LANES == 32'(cfg_cols));

  always_comb begin
    beat_ssq = FP_ZERO;
    for (int i = 0; i < LANES; i++) begin
      h[i] = cfg_add_residual ? fp_add(in_data[i], res_buf[waddr][i]) : in_data[i];
      beat_ssq = fp_add(beat_ssq, fp_mul(h[i], h[i]));
    end
  end

  always_ff @(posedge clk) begin
    if (gamma_we) gamma[gamma_addr] <= gamma_data;
    if (in_fire)  res_buf[waddr] <= h;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= R_IN;
      ssq       <= FP_ZERO;
      rs        <= FP_ONE;
      tok       <= '0;
      ocol      <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (st)
        R_IN: if (in_fire) begin
          ssq <= fp_add(ssq, beat_ssq);
          tok <= in_tok;
          if (row_end) st <= R_SCALE;
        end
        R_SCALE: begin
          rs   <= fp_rsqrt(fp_add(fp_mul(ssq, fp_recip(fp_from_int(32'(cfg_cols)))), EPS));
          ssq  <= FP_ZERO;
          ocol <= '0;
          st   <= R_OUT;
        end
        R_OUT: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          ocol      <= ocol + (COL_W+1)'(LANES);
          if (32'(ocol) + LANES == 32'(cfg_cols)) st <= R_IN;
        end
        default: st <= R_IN;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == R_OUT && (!out_valid || out_ready)) begin
      for (int i = 0; i < LANES; i++)
        out_data[i] <= fp_mul(fp_mul(res_buf[raddr][i], rs), gamma[32'(ocol) / LANES][i]);
      out_tok <= tok;
      out_col <= COL_W'(ocol);
    end
  end

endmodule
