// lut_llm_top: the LUT-LLM accelerator, a transformer-layer engine whose
// linear projections are computed by table lookup.
//
// Blocks and connections:
//   * lutlinear_engine performs every linear projection (Q, K, V, O, gate,
//     up, down). Its activations come either from the input reader port
//     (off-chip memory) or from the global activation buffer, selected per
//     projection by lin_src. Codebooks, 2D lookup tables and weight-centroid
//     indices arrive through the centroid-reader and table-reader ports.
//   * The projection result is routed by the destination in the execution
//     control word (lin_dest): to the output-writer port, to the attention
//     engine (Q, K, V), to the SwiGLU unit (gate, up) or to the residual +
//     RMSNorm unit. This is the spatial-temporal hybrid: the projections
//     run one after another on the shared engine, while their results
//     stream in dataflow fashion into the consumer units.
//   * The consumer units write their results into the global activation
//     buffer (fixed priority: RMSNorm, then SwiGLU, then attention), from
//     where the next projection reads them.
//   * The attention engine exchanges KV-cache rows with off-chip memory
//     through the KV-access ports (prefetch in, write-out of new rows).
// Off-chip memory and its reader/writer engines are outside this module;
// their streams are the module's ports. Sequencing of projections (the
// layer program) is done by the host through the start/done handshakes.
//
// Constraint: LANES must equal N_PAIRS * V, so that one activation-buffer
// word is one LUTLinear input beat.
module lut_llm_top
  import fp32_pkg::*;
  import lut_llm_pkg::*;
#(
  parameter int unsigned N_PAIRS    = CFG_N_PAIRS,
  parameter int unsigned V          = CFG_V,
  parameter int unsigned CA         = CFG_CA,
  parameter int unsigned CW         = CFG_CW,
  parameter int unsigned G          = CFG_G,
  parameter int unsigned L_CHAIN    = CFG_L_CHAIN,
  parameter int unsigned M_MAX      = CFG_M_MAX,
  parameter int unsigned D_MAX      = CFG_D_MAX,
  parameter int unsigned TOK_MAX    = CFG_TOK_MAX,
  parameter int unsigned LANES      = CFG_DQ_LANES,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned WR_ROWS    = 8,
  parameter int unsigned ROW_COPIES = 4,
  parameter int unsigned HIDDEN     = 2048,
  parameter int unsigned FFN        = 6144,
  parameter int unsigned HD         = 128,
  parameter int unsigned NH         = 16,
  parameter int unsigned NKV        = 8,
  parameter int unsigned S_MAX      = 384,
  localparam int unsigned NT_MAX = M_MAX / G,
  localparam int unsigned P_MAX  = D_MAX / (N_PAIRS * V),
  localparam int unsigned IA_W   = $clog2(CA),
  localparam int unsigned IW_W   = $clog2(CW),
  localparam int unsigned TK_W   = $clog2(TOK_MAX + 1),
  localparam int unsigned NT_W   = $clog2(NT_MAX + 1),
  localparam int unsigned T_W    = (NT_MAX > 1) ? $clog2(NT_MAX) : 1,
  localparam int unsigned PS_W   = $clog2(P_MAX + 1),
  localparam int unsigned COL_W  = $clog2(NT_MAX * G),
  localparam int unsigned BLK_W  = $clog2(NT_MAX * CA / WR_ROWS),
  localparam int unsigned LUT_WR_W = WR_ROWS * CW * 8,
  localparam int unsigned HCOL_W = $clog2(HIDDEN),
  localparam int unsigned POS_W  = $clog2(S_MAX + 1),
  localparam int unsigned KH_W   = (NKV > 1) ? $clog2(NKV) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // ---- LUTLinear command (execution control) ----
  input  logic                                 lin_start,
  input  logic                                 lin_src,       // 0: input reader, 1: global buffer
  input  logic [TK_W-1:0]                      lin_tokens,
  input  logic [NT_W-1:0]                      lin_groups,
  input  logic [PS_W-1:0]                      lin_passes,
  input  dest_e                                lin_dest,
  input  fp32_t                                lin_scale,
  input  fp32_t                                lin_shift,
  output logic                                 lin_busy,
  output logic                                 lin_done,
  output logic                                 lin_pass_done,
  // ---- input reader ----
  input  logic                                 ir_valid,
  output logic                                 ir_ready,
  input  fp32_t [N_PAIRS-1:0][V-1:0]           ir_vecs,
  // ---- centroid reader ----
  input  logic                                 cb_we,
  input  logic [IA_W-1:0]                      cb_addr,
  input  fp32_t [N_PAIRS-1:0][V-1:0]           cb_data,
  input  logic                                 cb_loaded,
  // ---- lookup table + weight index reader ----
  input  logic                                 lut_we,
  input  logic [BLK_W-1:0]                     lut_waddr,
  input  logic [N_PAIRS-1:0][LUT_WR_W-1:0]     lut_wdata,
  input  logic                                 widx_we,
  input  logic [T_W-1:0]                       widx_waddr,
  input  logic [N_PAIRS-1:0][G-1:0][IW_W-1:0]  widx_wdata,
  input  logic                                 lut_loaded,
  // ---- output writer ----
  output logic                                 ow_valid,
  input  logic                                 ow_ready,
  output logic [TK_W-1:0]                      ow_tok,
  output logic [COL_W-1:0]                     ow_col,
  output logic                                 ow_last,
  output fp32_t [LANES-1:0]                    ow_data,
  // ---- residual + RMSNorm unit ----
  input  logic                                 norm_add_residual,
  input  logic [HCOL_W:0]                      norm_cols,
  input  logic                                 gamma_we,
  input  logic [$clog2(HIDDEN/LANES)-1:0]      gamma_addr,
  input  fp32_t [LANES-1:0]                    gamma_data,
  // ---- attention engine ----
  input  logic                                 attn_start,
  input  logic [TK_W-1:0]                      attn_tokens,
  input  logic [POS_W-1:0]                     attn_pos_base,
  output logic                                 attn_busy,
  output logic                                 attn_done,
  input  logic                                 rope_we,
  input  logic [POS_W-1:0]                     rope_pos,
  input  fp32_t [HD/2-1:0]                     rope_cos,
  input  fp32_t [HD/2-1:0]                     rope_sin,
  // ---- KV access ----
  input  logic                                 kv_in_we,
  input  logic                                 kv_in_is_v,
  input  logic [KH_W-1:0]                      kv_in_head,
  input  logic [POS_W-1:0]                     kv_in_pos,
  input  fp32_t [HD-1:0]                       kv_in_row,
  output logic                                 kv_out_valid,
  input  logic                                 kv_out_ready,
  output logic                                 kv_out_is_v,
  output logic [KH_W-1:0]                      kv_out_head,
  output logic [POS_W-1:0]                     kv_out_pos,
  output fp32_t [HD-1:0]                       kv_out_row
);

  // ---------------- LUTLinear input selection ----------------
  logic                       src_q;
  logic                       lin_in_valid, lin_in_ready;
  fp32_t [N_PAIRS-1:0][V-1:0] lin_in_vecs;
  logic [TK_W-1:0]            rd_tok;
  logic [$clog2(D_MAX/LANES)-1:0] rd_beat;
  fp32_t [LANES-1:0]          rd_data;

  assign lin_in_valid = src_q ? lin_busy : ir_valid;
  assign lin_in_vecs  = src_q ? (N_PAIRS*V*32)'(rd_data) : ir_vecs;
  assign ir_ready     = !src_q && lin_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q   <= 1'b0;
      rd_tok  <= '0;
      rd_beat <= '0;
    end else if (lin_start && !lin_busy) begin
      src_q   <= lin_src;
      rd_tok  <= '0;
      rd_beat <= '0;
    end else if (src_q && lin_in_valid && lin_in_ready) begin
      if (rd_tok == lin_tokens - 1'b1) begin
        rd_tok  <= '0;
        rd_beat <= rd_beat + 1'b1;
      end else begin
        rd_tok  <= rd_tok + 1'b1;
      end
    end
  end

  // ---------------- LUTLinear engine ----------------
  logic              lo_valid, lo_ready, lo_last;
  dest_e             lo_dest;
  logic [TK_W-1:0]   lo_tok;
  logic [COL_W-1:0]  lo_col;
  fp32_t [LANES-1:0] lo_data;

  lutlinear_engine #(
    .N_PAIRS(N_PAIRS), .V(V), .CA(CA), .CW(CW), .G(G), .L_CHAIN(L_CHAIN), .NT_MAX(NT_MAX),
    .P_MAX(P_MAX), .TOK_MAX(TOK_MAX), .ACC_W(CFG_ACC_W), .LANES(LANES), .FIFO_DEPTH(FIFO_DEPTH),
    .WR_ROWS(WR_ROWS), .ROW_COPIES(ROW_COPIES)
  ) u_lutlinear (
    .clk, .rst_n,
    .start      (lin_start),
    .cfg_tokens (lin_tokens),
    .cfg_groups (lin_groups),
    .cfg_passes (lin_passes),
    .cfg_dest   (lin_dest),
    .cfg_scale  (lin_scale),
    .cfg_shift  (lin_shift),
    .busy       (lin_busy),
    .done       (lin_done),
    .pass_done  (lin_pass_done),
    .in_valid   (lin_in_valid),
    .in_ready   (lin_in_ready),
    .in_vecs    (lin_in_vecs),
    .cb_we, .cb_addr, .cb_data, .cb_loaded,
    .lut_we, .lut_waddr, .lut_wdata, .widx_we, .widx_waddr, .widx_wdata, .lut_loaded,
    .out_valid  (lo_valid),
    .out_ready  (lo_ready),
    .out_dest   (lo_dest),
    .out_tok    (lo_tok),
    .out_col    (lo_col),
    .out_last   (lo_last),
    .out_data   (lo_data)
  );

  // ---------------- destination routing ----------------
  logic to_ow, to_attn, to_swi, to_norm;
  logic at_in_ready, sw_in_ready, nm_in_ready;

  assign to_ow   = (lo_dest == DEST_HBM);
  assign to_attn = (lo_dest == DEST_ATTN_Q) || (lo_dest == DEST_ATTN_K) || (lo_dest == DEST_ATTN_V);
  assign to_swi  = (lo_dest == DEST_SWI_GATE) || (lo_dest == DEST_SWI_UP);
  assign to_norm = (lo_dest == DEST_NORM);

  assign lo_ready = (to_ow && ow_ready) || (to_attn && at_in_ready) ||
                    (to_swi && sw_in_ready) || (to_norm && nm_in_ready);
  assign ow_valid = lo_valid && to_ow;
  assign ow_tok   = lo_tok;
  assign ow_col   = lo_col;
  assign ow_last  = lo_last;
  assign ow_data  = lo_data;

  // ---------------- consumer units ----------------
  logic              sw_valid, sw_ready, nm_valid, nm_ready, at_valid, at_ready;
  logic [TK_W-1:0]   sw_tok, nm_tok, at_tok;
  logic [$clog2(FFN)-1:0]     sw_col;
  logic [HCOL_W-1:0]          nm_col;
  logic [$clog2(NH*HD)-1:0]   at_col;
  fp32_t [LANES-1:0] sw_data, nm_data, at_data;

  swiglu_unit #(.LANES(LANES), .COLS(FFN), .TOK_MAX(TOK_MAX)) u_swiglu (
    .clk, .rst_n,
    .in_valid (lo_valid && to_swi),
    .in_ready (sw_in_ready),
    .in_dest  (lo_dest),
    .in_tok   (lo_tok),
    .in_col   ($clog2(FFN)'(lo_col)),
    .in_data  (lo_data),
    .out_valid(sw_valid),
    .out_ready(sw_ready),
    .out_tok  (sw_tok),
    .out_col  (sw_col),
    .out_data (sw_data)
  );

  rmsnorm_unit #(.LANES(LANES), .H_MAX(HIDDEN), .TOK_MAX(TOK_MAX)) u_norm (
    .clk, .rst_n,
    .cfg_cols        (norm_cols),
    .cfg_add_residual(norm_add_residual),
    .gamma_we, .gamma_addr, .gamma_data,
    .in_valid (lo_valid && to_norm),
    .in_ready (nm_in_ready),
    .in_tok   (lo_tok),
    .in_col   (HCOL_W'(lo_col)),
    .in_data  (lo_data),
    .out_valid(nm_valid),
    .out_ready(nm_ready),
    .out_tok  (nm_tok),
    .out_col  (nm_col),
    .out_data (nm_data)
  );

  attention_engine #(.HD(HD), .NH(NH), .NKV(NKV), .S_MAX(S_MAX), .TOK_MAX(TOK_MAX), .LANES(LANES)) u_attn (
    .clk, .rst_n,
    .start       (attn_start),
    .cfg_tokens  (attn_tokens),
    .cfg_pos_base(attn_pos_base),
    .busy        (attn_busy),
    .done        (attn_done),
    .in_valid    (lo_valid && to_attn),
    .in_ready    (at_in_ready),
    .in_dest     (lo_dest),
    .in_tok      (lo_tok),
    .in_col      ($clog2(NH*HD)'(lo_col)),
    .in_data     (lo_data),
    .rope_we, .rope_pos, .rope_cos, .rope_sin,
    .kv_in_we, .kv_in_is_v, .kv_in_head, .kv_in_pos, .kv_in_row,
    .kv_out_valid, .kv_out_ready, .kv_out_is_v, .kv_out_head, .kv_out_pos, .kv_out_row,
    .out_valid   (at_valid),
    .out_ready   (at_ready),
    .out_tok     (at_tok),
    .out_col     (at_col),
    .out_data    (at_data)
  );

  // ---------------- global activation buffer ----------------
  logic                      buf_we;
  logic [TK_W-1:0]           buf_tok;
  logic [$clog2(D_MAX)-1:0]  buf_col;
  fp32_t [LANES-1:0]         buf_data;

  assign nm_ready = 1'b1;
  assign sw_ready = !nm_valid;
  assign at_ready = !nm_valid && !sw_valid;

  always_comb begin
    buf_we   = nm_valid || sw_valid || at_valid;
    buf_tok  = nm_valid ? nm_tok : sw_valid ? sw_tok : at_tok;
    buf_col  = nm_valid ? $clog2(D_MAX)'(nm_col) : sw_valid ? $clog2(D_MAX)'(sw_col) : $clog2(D_MAX)'(at_col);
    buf_data = nm_valid ? nm_data : sw_valid ? sw_data : at_data;
  end

  act_buffer #(.LANES(LANES), .D_MAX(D_MAX), .TOK_MAX(TOK_MAX)) u_buf (
    .clk,
    .wr_en  (buf_we),
    .wr_tok (buf_tok),
    .wr_col (buf_col),
    .wr_data(buf_data),
    .rd_tok (rd_tok),
    .rd_beat(rd_beat),
    .rd_data(rd_data)
  );

  if (LANES != N_PAIRS * V) begin : g_bad_lanes
    $error("lut_llm_top: LANES must equal N_PAIRS * V");
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(lin_start && lin_busy))
    else $error("lut_llm_top: projection started while the engine is busy");

endmodule
