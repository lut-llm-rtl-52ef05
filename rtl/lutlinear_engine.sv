// lutlinear_engine: the LUTLinear engine, which performs every linear
// projection of the model by centroid search and 2D table lookup.
//
// Structure: N_PAIRS pairs of a BPCSU and a 2D-PSum engine, connected by an
// index FIFO each. Pair k handles activation-vector position p*N_PAIRS + k of
// the hidden dimension during pass p, with its own activation codebook
// (in its BPCSU), its own 2D lookup tables and weight-centroid indices (in
// its 2D-PSum). The 2D-PSum engines form a serial cascade; the last one
// feeds the accumulator/output buffer, whose contents are converted to FP32
// by the dequantizer and routed to the destination named by the execution
// control word.
//
// Operation of one projection (cfg_* sampled at start):
//   for pass p = 0 .. cfg_passes-1          (hidden-dimension chunks)
//     the loaders write the pass's codebooks (cb_*) and pulse cb_loaded,
//     and write its lookup tables and weight indices (lut_*, widx_*) and
//     pulse lut_loaded; the two may arrive in either order, so centroid
//     search overlaps table loading;
//     for token l = 0 .. cfg_tokens-1        (sequence dimension)
//       one input beat carries the N_PAIRS activation vectors of token l;
//       each BPCSU finds its nearest centroid and queues the index;
//       each index is looked up against all cfg_groups output groups.
//   pass_done pulses after each pass so that the loaders can refill.
//   Finally the output buffer is drained as LANES FP32 values per beat.
// Iterating over tokens inside a pass keeps the centroid search fully
// pipelined without reloading codebooks, as in the source architecture.
//
// Flow control: BPCSUs have no back-pressure, so inputs are admitted
// against a credit counter equal to the index FIFO depth, returned when the
// last pair pops an index. Table/codebook buffers are single-buffered: the
// next pass is loaded after pass_done (this design's simplification).
// Timing: a token takes one cycle in the BPCSUs and cfg_groups cycles in the
// 2D-PSum cascade; steady-state throughput is G*cfg_groups outputs of
// N_PAIRS*V inputs each per cfg_groups cycles.
module lutlinear_engine
  import fp32_pkg::*;
  import lut_llm_pkg::*;
#(
  parameter int unsigned N_PAIRS    = 8,
  parameter int unsigned V          = 2,
  parameter int unsigned CA         = 64,
  parameter int unsigned CW         = 16,
  parameter int unsigned G          = 512,
  parameter int unsigned L_CHAIN    = 16,
  parameter int unsigned NT_MAX     = 12,
  parameter int unsigned P_MAX      = 384,
  parameter int unsigned TOK_MAX    = 128,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned LANES      = 16,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned WR_ROWS    = 8,
  parameter int unsigned ROW_COPIES = 4,
  localparam int unsigned IA_W  = $clog2(CA),
  localparam int unsigned IW_W  = $clog2(CW),
  localparam int unsigned TK_W  = $clog2(TOK_MAX + 1),
  localparam int unsigned NT_W  = $clog2(NT_MAX + 1),
  localparam int unsigned T_W   = (NT_MAX > 1) ? $clog2(NT_MAX) : 1,
  localparam int unsigned PS_W  = $clog2(P_MAX + 1),
  localparam int unsigned COL_W = $clog2(NT_MAX * G),
  localparam int unsigned BLK_W = $clog2(NT_MAX * CA / WR_ROWS),
  localparam int unsigned LUT_WR_W = WR_ROWS * CW * 8
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // projection command
  input  logic                                   start,
  input  logic [TK_W-1:0]                        cfg_tokens,
  input  logic [NT_W-1:0]                        cfg_groups,
  input  logic [PS_W-1:0]                        cfg_passes,
  input  dest_e                                  cfg_dest,
  input  fp32_t                                  cfg_scale,
  input  fp32_t                                  cfg_shift,
  output logic                                   busy,
  output logic                                   done,
  output logic                                   pass_done,
  // input reader: one token's N_PAIRS activation vectors per beat
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  fp32_t [N_PAIRS-1:0][V-1:0]             in_vecs,
  // centroid reader
  input  logic                                   cb_we,
  input  logic [IA_W-1:0]                        cb_addr,
  input  fp32_t [N_PAIRS-1:0][V-1:0]             cb_data,
  input  logic                                   cb_loaded,
  // lookup table + weight index reader
  input  logic                                   lut_we,
  input  logic [BLK_W-1:0]                       lut_waddr,
  input  logic [N_PAIRS-1:0][LUT_WR_W-1:0]       lut_wdata,
  input  logic                                   widx_we,
  input  logic [T_W-1:0]                         widx_waddr,
  input  logic [N_PAIRS-1:0][G-1:0][IW_W-1:0]    widx_wdata,
  input  logic                                   lut_loaded,
  // dequantized, routed output
  output logic                                   out_valid,
  input  logic                                   out_ready,
  output dest_e                                  out_dest,
  output logic [TK_W-1:0]                        out_tok,
  output logic [COL_W-1:0]                       out_col,
  output logic                                   out_last,
  output fp32_t [LANES-1:0]                      out_data
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_WAIT} state_e;

  state_e           state;
  logic [TK_W-1:0]  tokens, issued, tok_done;
  logic [NT_W-1:0]  groups;
  logic [PS_W-1:0]  passes, pass;
  dest_e            dest;
  fp32_t            scale, shift;
  logic             cb_ok, lut_ok;
  logic [$clog2(FIFO_DEPTH+1)-1:0] credits;
  logic             pass_start, drain_start, pass_end;

  // ---------------- pairs ----------------
  logic                    bp_valid [N_PAIRS];
  logic [IA_W-1:0]         bp_idx   [N_PAIRS];
  logic                    ff_empty [N_PAIRS];
  logic [IA_W-1:0]         ff_data  [N_PAIRS];
  logic                    ff_pop   [N_PAIRS];
  logic                    cs_valid [N_PAIRS+1];
  logic [T_W-1:0]          cs_grp   [N_PAIRS+1];
  logic                    cs_last  [N_PAIRS+1];
  logic [G-1:0][ACC_W-1:0] cs_data  [N_PAIRS+1];
  logic                    in_fire;

  assign in_fire     = in_valid && in_ready;
  assign cs_valid[0] = 1'b0;
  assign cs_grp[0]   = '0;
  assign cs_last[0]  = 1'b0;
  assign cs_data[0]  = '0;

  for (genvar k = 0; k < N_PAIRS; k++) begin : g_pair
    fp32_t unused_dist;
    logic  unused_full;
    logic [$clog2(FIFO_DEPTH):0] unused_count;

    bpcsu #(.V(V), .CA(CA), .L_CHAIN(L_CHAIN)) u_bpcsu (
      .clk, .rst_n,
      .cb_we    (cb_we),
      .cb_addr  (cb_addr),
      .cb_data  (cb_data[k]),
      .in_valid (in_fire),
      .in_vec   (in_vecs[k]),
      .out_valid(bp_valid[k]),
      .out_idx  (bp_idx[k]),
      .out_dist (unused_dist)
    );

    idx_fifo #(.W(IA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push     (bp_valid[k]),
      .push_data(bp_idx[k]),
      .pop      (ff_pop[k]),
      .pop_data (ff_data[k]),
      .empty    (ff_empty[k]),
      .full     (unused_full),
      .count    (unused_count)
    );

    psum2d #(.CA(CA), .CW(CW), .G(G), .NT_MAX(NT_MAX), .ACC_W(ACC_W), .LUT_W(8),
             .WR_ROWS(WR_ROWS), .ROW_COPIES(ROW_COPIES), .FIRST(k == 0)) u_psum (
      .clk, .rst_n,
      .lut_we       (lut_we),
      .lut_waddr    (lut_waddr),
      .lut_wdata    (lut_wdata[k]),
      .widx_we      (widx_we),
      .widx_waddr   (widx_waddr),
      .widx_wdata   (widx_wdata[k]),
      .cfg_groups   (groups),
      .en           (lut_ok),
      .idx_valid    (!ff_empty[k]),
      .idx          (ff_data[k]),
      .idx_pop      (ff_pop[k]),
      .cas_in_valid (cs_valid[k]),
      .cas_in_grp   (cs_grp[k]),
      .cas_in       (cs_data[k]),
      .cas_out_valid(cs_valid[k+1]),
      .cas_out_grp  (cs_grp[k+1]),
      .cas_out_last (cs_last[k+1]),
      .cas_out      (cs_data[k+1])
    );
  end

  // ---------------- control ----------------
  assign in_ready = (state == S_RUN) && cb_ok && (issued != tokens) && (credits != 0);
  assign pass_end = (state == S_RUN) && cs_valid[N_PAIRS] && cs_last[N_PAIRS] &&
                    (tok_done == tokens - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      tokens      <= '0;
      groups      <= NT_W'(1);
      passes      <= '0;
      pass        <= '0;
      dest        <= DEST_HBM;
      scale       <= FP_ONE;
      shift       <= FP_ZERO;
      issued      <= '0;
      tok_done    <= '0;
      cb_ok       <= 1'b0;
      lut_ok      <= 1'b0;
      credits     <= ($clog2(FIFO_DEPTH+1))'(FIFO_DEPTH);
      pass_start  <= 1'b0;
      drain_start <= 1'b0;
      pass_done   <= 1'b0;
      done        <= 1'b0;
    end else begin
      pass_start  <= 1'b0;
      drain_start <= 1'b0;
      pass_done   <= 1'b0;
      done        <= 1'b0;
      credits <= credits - $bits(credits)'(in_fire) + $bits(credits)'(ff_pop[N_PAIRS-1]);
      if (in_fire) issued <= issued + 1'b1;
      if (cs_valid[N_PAIRS] && cs_last[N_PAIRS]) tok_done <= tok_done + 1'b1;
      if (cb_loaded)  cb_ok  <= 1'b1;
      if (lut_loaded) lut_ok <= 1'b1;
      case (state)
        S_IDLE: if (start) begin
          state      <= S_RUN;
          tokens     <= cfg_tokens;
          groups     <= cfg_groups;
          passes     <= cfg_passes;
          dest       <= cfg_dest;
          scale      <= cfg_scale;
          shift      <= cfg_shift;
          pass       <= '0;
          issued     <= '0;
          tok_done   <= '0;
          pass_start <= 1'b1;
        end
        S_RUN: if (pass_end) begin
          pass_done <= 1'b1;
          issued    <= '0;
          tok_done  <= '0;
          cb_ok     <= cb_loaded;
          lut_ok    <= lut_loaded;
          if (pass == passes - 1'b1) begin
            state       <= S_DRAIN;
            drain_start <= 1'b1;
          end else begin
            pass       <= pass + 1'b1;
            pass_start <= 1'b1;
          end
        end
        S_DRAIN: state <= S_WAIT;   // drain_start is seen by the accumulator
        S_WAIT: if (out_valid && out_ready && out_last) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------- accumulator, output buffer, dequantizer ----------------
  localparam int unsigned TAG_W = 3 + TK_W + COL_W + 1;

  logic                        ac_valid, ac_ready, ac_last, unused_busy;
  dest_e                       ac_dest;
  logic [TK_W-1:0]             ac_tok;
  logic [COL_W-1:0]            ac_col;
  logic [LANES-1:0][ACC_W-1:0] ac_data;
  logic [TAG_W-1:0]            dq_tag;

  lut_accumulator #(.G(G), .ACC_W(ACC_W), .TOK_MAX(TOK_MAX), .NT_MAX(NT_MAX), .LANES(LANES)) u_acc (
    .clk, .rst_n,
    .cfg_tokens (tokens),
    .cfg_groups (groups),
    .pass_start (pass_start),
    .first_pass (pass == '0),
    .in_valid   (cs_valid[N_PAIRS]),
    .in_grp     (cs_grp[N_PAIRS]),
    .in_last    (cs_last[N_PAIRS]),
    .in_vals    (cs_data[N_PAIRS]),
    .drain_start(drain_start),
    .drain_dest (dest),
    .drain_busy (unused_busy),
    .out_valid  (ac_valid),
    .out_ready  (ac_ready),
    .out_dest   (ac_dest),
    .out_tok    (ac_tok),
    .out_col    (ac_col),
    .out_last   (ac_last),
    .out_data   (ac_data)
  );

  dequantizer #(.LANES(LANES), .ACC_W(ACC_W), .TAG_W(TAG_W)) u_dq (
    .clk, .rst_n,
    .scale    (scale),
    .shift    (shift),
    .in_valid (ac_valid),
    .in_ready (ac_ready),
    .in_data  (ac_data),
    .in_tag   ({ac_dest, ac_tok, ac_col, ac_last}),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (out_data),
    .out_tag  (dq_tag)
  );

  assign out_dest = dest_e'(dq_tag[TAG_W-1 -: 3]);
  assign out_tok  = dq_tag[TAG_W-4 -: TK_W];
  assign out_col  = dq_tag[COL_W:1];
  assign out_last = dq_tag[0];

  assert property (@(posedge clk) disable iff (!rst_n) in_fire |-> credits != 0)
    else $error("lutlinear_engine: index FIFO credit underflow");

endmodule
