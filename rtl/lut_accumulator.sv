// lut_accumulator: accumulator and output buffer of the LUTLinear engine.
//
// Every cycle the last 2D-PSum engine of the cascade may deliver G partial
// sums for one (token, output group). The accumulator adds them into the
// output buffer, which holds TOK_MAX tokens x NT_MAX groups x G columns of
// ACC_W-bit integers. The first hidden-dimension pass of a projection
// overwrites the buffer, later passes add to it. Tokens are counted locally:
// an input flagged in_last closes the current token.
//
// When the projection is complete, drain_start (with the execution-control
// word drain_dest) streams the buffer out in token, group, column order,
// LANES values per beat with a valid/ready handshake, each beat tagged with
// its destination, token and first column. This is the coarse-grain
// reconfigurable routing by an execution control signal to the accumulator
// described for the source architecture; the buffer layout, beat width and
// handshake are this design's choices.
//
// Timing: an accumulation takes effect at the next clock edge; the drain
// produces one beat per cycle while out_ready is high.
module lut_accumulator
  import lut_llm_pkg::*;
#(
  parameter int unsigned G       = 512,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned TOK_MAX = 128,
  parameter int unsigned NT_MAX  = 12,
  parameter int unsigned LANES   = 16,
  localparam int unsigned TK_W  = $clog2(TOK_MAX + 1),
  localparam int unsigned NT_W  = $clog2(NT_MAX + 1),
  localparam int unsigned T_W   = (NT_MAX > 1) ? $clog2(NT_MAX) : 1,
  localparam int unsigned COL_W = $clog2(NT_MAX * G),
  localparam int unsigned CH_N  = G / LANES,
  localparam int unsigned CH_W  = (CH_N > 1) ? $clog2(CH_N) : 1,
  localparam int unsigned A_W   = $clog2(TOK_MAX * NT_MAX)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [TK_W-1:0]               cfg_tokens,
  input  logic [NT_W-1:0]               cfg_groups,
  input  logic                          pass_start,
  input  logic                          first_pass,
  input  logic                          in_valid,
  input  logic [T_W-1:0]                in_grp,
  input  logic                          in_last,
  input  logic [G-1:0][ACC_W-1:0]       in_vals,
  input  logic                          drain_start,
  input  dest_e                         drain_dest,
  output logic                          drain_busy,
  output logic                          out_valid,
  input  logic                          out_ready,
  output dest_e                         out_dest,
  output logic [TK_W-1:0]               out_tok,
  output logic [COL_W-1:0]              out_col,
  output logic                          out_last,
  output logic [LANES-1:0][ACC_W-1:0]   out_data
);

  logic [G-1:0][ACC_W-1:0] buffer [TOK_MAX * NT_MAX];

  // ---------------- accumulation ----------------
  logic [TK_W-1:0] tok_in;
  logic [A_W-1:0]  wr_addr;

  assign wr_addr = A_W'(32'(tok_in) * NT_MAX + 32'(in_grp));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     tok_in <= '0;
    else if (pass_start)            tok_in <= '0;
    else if (in_valid && in_last)   tok_in <= tok_in + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int g = 0; g < G; g++)
        buffer[wr_addr][g] <= first_pass ? in_vals[g] : buffer[wr_addr][g] + in_vals[g];
    end
  end

  // ---------------- drain ----------------
  logic [TK_W-1:0] d_tok;
  logic [T_W-1:0]  d_grp;
  logic [CH_W-1:0] d_ch;
  dest_e           d_dest;
  logic            d_last;
  logic [A_W-1:0]  rd_addr;

  assign rd_addr = A_W'(32'(d_tok) * NT_MAX + 32'(d_grp));
  assign d_last  = (d_tok == cfg_tokens - 1'b1) && (NT_W'(d_grp) == cfg_groups - 1'b1) &&
                   (32'(d_ch) == CH_N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_busy <= 1'b0;
      out_valid  <= 1'b0;
      d_tok      <= '0;
      d_grp      <= '0;
      d_ch       <= '0;
      d_dest     <= DEST_HBM;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (drain_start && !drain_busy) begin
        drain_busy <= 1'b1;
        d_tok      <= '0;
        d_grp      <= '0;
        d_ch       <= '0;
        d_dest     <= drain_dest;
      end else if (drain_busy && (!out_valid || out_ready)) begin
        out_valid <= 1'b1;
        if (d_last) begin
          drain_busy <= 1'b0;
        end else if (32'(d_ch) == CH_N - 1) begin
          d_ch <= '0;
          if (NT_W'(d_grp) == cfg_groups - 1'b1) begin
            d_grp <= '0;
            d_tok <= d_tok + 1'b1;
          end else begin
            d_grp <= d_grp + 1'b1;
          end
        end else begin
          d_ch <= d_ch + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (drain_busy && (!out_valid || out_ready)) begin
      for (int i = 0; i < LANES; i++)
        out_data[i] <= buffer[rd_addr][32'(d_ch) * LANES + i];
      out_dest <= d_dest;
      out_tok  <= d_tok;
      out_col  <= COL_W'(32'(d_grp) * G + 32'(d_ch) * LANES);
      out_last <= d_last;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && drain_busy))
    else $error("lut_accumulator: accumulation during drain");

endmodule
