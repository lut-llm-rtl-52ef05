// attention_engine: grouped-query attention with rotary position embedding
// for the prefill and decode stages.
//
// Inputs arrive from the LUTLinear engine as LANES-wide beats tagged
// DEST_ATTN_Q, DEST_ATTN_K or DEST_ATTN_V. Queries of the cfg_tokens new
// tokens are kept in a query buffer; keys and values are written straight
// into the on-chip KV buffer at positions cfg_pos_base + token, behind the
// cfg_pos_base cached positions that were prefetched from off-chip memory
// through the kv_in port. After start the engine
//   1. applies RoPE (rotate-half form) to the new keys in place, using the
//      cos/sin rows loaded into its RoPE table,
//   2. writes the new (rotated) key and value rows out through kv_out, so
//      they can be appended to the off-chip KV cache,
//   3. for every new token and query head: rotates and scales the query by
//      1/sqrt(HD); computes the scores q.k_j for the causal context
//      j = 0 .. pos (QK^T, one key row of HD elements per cycle); applies
//      softmax (running maximum, exp, sum, one reciprocal); accumulates
//      sum_j p_j v_j over all HD elements in parallel (AV, one value row
//      per cycle); and streams the normalised head output out.
// Query head h uses key/value head h / (NH/NKV).
//
// Parallelism is along the head dimension and along the key/value sequence
// only, so the same unit serves one-token decode and multi-token prefill,
// as in the source architecture. This engine runs the QK^T, softmax and AV
// phases one after the other for a head, whereas the source architecture
// pipelines two GEMM/GEMV engines in dataflow; the RoPE form, the buffers
// and the FP32 approximations are this design's choices.
//
// Interface: valid/ready streams for Q/K/V input, attention output (token,
// column) and KV write-out; write ports for KV prefetch and the RoPE table.
// Timing: per (token, head) about 3*(pos+1) + HD/LANES + 3 cycles.
module attention_engine
  import fp32_pkg::*;
  import lut_llm_pkg::*;
#(
  parameter int unsigned HD      = 128,   // head dimension
  parameter int unsigned NH      = 16,    // query heads
  parameter int unsigned NKV     = 8,     // key/value heads
  parameter int unsigned S_MAX   = 384,   // context positions held on chip
  parameter int unsigned TOK_MAX = 128,
  parameter int unsigned LANES   = 16,
  localparam int unsigned TK_W  = $clog2(TOK_MAX + 1),
  localparam int unsigned POS_W = $clog2(S_MAX + 1),
  localparam int unsigned COL_W = $clog2(NH * HD),
  localparam int unsigned H_W   = (NH > 1) ? $clog2(NH) : 1,
  localparam int unsigned KH_W  = (NKV > 1) ? $clog2(NKV) : 1,
  localparam int unsigned BPR   = HD / LANES,     // beats per head row
  localparam int unsigned B_W   = (BPR > 1) ? $clog2(BPR) : 1,
  localparam int unsigned HALF  = HD / 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  start,
  input  logic [TK_W-1:0]       cfg_tokens,
  input  logic [POS_W-1:0]      cfg_pos_base,
  output logic                  busy,
  output logic                  done,
  // Q/K/V from the LUTLinear engine
  input  logic                  in_valid,
  output logic                  in_ready,
  input  dest_e                 in_dest,
  input  logic [TK_W-1:0]       in_tok,
  input  logic [COL_W-1:0]      in_col,
  input  fp32_t [LANES-1:0]     in_data,
  // RoPE table
  input  logic                  rope_we,
  input  logic [POS_W-1:0]      rope_pos,
  input  fp32_t [HALF-1:0]      rope_cos,
  input  fp32_t [HALF-1:0]      rope_sin,
  // KV prefetch from off-chip memory
  input  logic                  kv_in_we,
  input  logic                  kv_in_is_v,
  input  logic [KH_W-1:0]       kv_in_head,
  input  logic [POS_W-1:0]      kv_in_pos,
  input  fp32_t [HD-1:0]        kv_in_row,
  // KV write-out to off-chip memory
  output logic                  kv_out_valid,
  input  logic                  kv_out_ready,
  output logic                  kv_out_is_v,
  output logic [KH_W-1:0]       kv_out_head,
  output logic [POS_W-1:0]      kv_out_pos,
  output fp32_t [HD-1:0]        kv_out_row,
  // attention output
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [TK_W-1:0]       out_tok,
  output logic [COL_W-1:0]      out_col,
  output fp32_t [LANES-1:0]     out_data
);

  localparam int unsigned GRP = NH / NKV;
  localparam int unsigned KV_N = NKV * S_MAX;
  localparam int unsigned KV_A = $clog2(KV_N);

  // ---------------- storage ----------------
  fp32_t [BPR-1:0][LANES-1:0] q_buf [TOK_MAX * NH];
  fp32_t [BPR-1:0][LANES-1:0] k_buf [KV_N];
  fp32_t [BPR-1:0][LANES-1:0] v_buf [KV_N];
  fp32_t [1:0][HALF-1:0]      rope  [S_MAX];
  fp32_t                      sbuf  [S_MAX];

  typedef enum logic [3:0] {A_IDLE, A_ROPEK, A_WB, A_LOADQ, A_SCORE, A_EXP, A_AV, A_NORM, A_OUT} astate_e;
  astate_e st;

  logic [TK_W-1:0]  tokens, l;
  logic [POS_W-1:0] base, j, ctx;
  logic [H_W-1:0]   h;
  logic [KH_W-1:0]  kh;
  logic             wb_v;
  logic [B_W-1:0]   ob;
  fp32_t            mx, sum, inv;
  fp32_t [HD-1:0]   q_row, acc;

  // rotate-half RoPE of one row at position pos
  function automatic fp32_t [HD-1:0] rope_rot(fp32_t [HD-1:0] x, fp32_t [1:0][HALF-1:0] cs);
    fp32_t [HD-1:0] y;
    for (int d = 0; d < HALF; d++) begin
      y[d]        = fp_sub(fp_mul(x[d], cs[0][d]), fp_mul(x[d+HALF], cs[1][d]));
      y[d + HALF] = fp_add(fp_mul(x[d+HALF], cs[0][d]), fp_mul(x[d], cs[1][d]));
    end
    return y;
  endfunction

  function automatic fp32_t dot(fp32_t [HD-1:0] a, fp32_t [HD-1:0] b);
    fp32_t s = FP_ZERO;
    for (int d = 0; d < HD; d++) s = fp_add(s, fp_mul(a[d], b[d]));
    return s;
  endfunction

  // ---------------- input side ----------------
  logic             in_fire;
  logic [POS_W-1:0] in_pos;
  logic [KH_W-1:0]  in_kh;
  logic [B_W-1:0]   in_b;

  assign in_ready = (st == A_IDLE);
  assign in_fire  = in_valid && in_ready;
  assign in_pos   = cfg_pos_base + POS_W'(in_tok);
  assign in_kh    = KH_W'(32'(in_col) / HD);
  assign in_b     = B_W'((32'(in_col) % HD) / LANES);

  // ---------------- addresses ----------------
  logic [KV_A-1:0] rk_addr, kv_row_addr, in_kv_addr, pf_addr;
  logic [POS_W-1:0] cur_pos, wb_pos;

  assign cur_pos     = base + POS_W'(l);
  assign kv_row_addr = KV_A'(32'(kh) * S_MAX + 32'(j));
  assign rk_addr     = KV_A'(32'(kh) * S_MAX + 32'(cur_pos));
  assign in_kv_addr  = KV_A'(32'(in_kh) * S_MAX + 32'(in_pos));
  assign pf_addr     = KV_A'(32'(kv_in_head) * S_MAX + 32'(kv_in_pos));
  assign wb_pos      = cur_pos;

  // ---------------- datapath memories ----------------
  always_ff @(posedge clk) begin
    if (rope_we) rope[rope_pos] <= {rope_sin, rope_cos};
    if (kv_in_we) begin
      if (kv_in_is_v) v_buf[pf_addr] <= kv_in_row;
      else            k_buf[pf_addr] <= kv_in_row;
    end
    if (in_fire) begin
      case (in_dest)
        DEST_ATTN_Q: q_buf[32'(in_tok) * NH + 32'(in_col) / HD][in_b] <= in_data;
        DEST_ATTN_K: k_buf[in_kv_addr][in_b] <= in_data;
        DEST_ATTN_V: v_buf[in_kv_addr][in_b] <= in_data;
        default: ;
      endcase
    end
    if (st == A_ROPEK) k_buf[rk_addr] <= rope_rot(k_buf[rk_addr], rope[cur_pos]);
  end

  // ---------------- control ----------------
  logic last_l, last_kh, last_h;
  assign last_l  = (l == tokens - 1'b1);
  assign last_kh = (32'(kh) == NKV - 1);
  assign last_h  = (32'(h) == NH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= A_IDLE;
      tokens       <= '0;
      base         <= '0;
      l            <= '0;
      h            <= '0;
      kh           <= '0;
      j            <= '0;
      ctx          <= '0;
      wb_v         <= 1'b0;
      ob           <= '0;
      mx           <= FP_NINF;
      sum          <= FP_ZERO;
      inv          <= FP_ONE;
      done         <= 1'b0;
      kv_out_valid <= 1'b0;
      out_valid    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (kv_out_valid && kv_out_ready) kv_out_valid <= 1'b0;
      if (out_valid && out_ready)       out_valid    <= 1'b0;
      case (st)
        A_IDLE: if (start) begin
          tokens <= cfg_tokens;
          base   <= cfg_pos_base;
          l      <= '0;
          kh     <= '0;
          st     <= A_ROPEK;
        end
        A_ROPEK: begin                               // one key row per cycle
          if (last_l) begin
            l <= '0;
            if (last_kh) begin
              kh   <= '0;
              wb_v <= 1'b0;
              st   <= A_WB;
            end else kh <= kh + 1'b1;
          end else l <= l + 1'b1;
        end
        A_WB: if (!kv_out_valid || kv_out_ready) begin   // write out new K then V rows
          kv_out_valid <= 1'b1;
          if (last_l) begin
            l <= '0;
            if (last_kh) begin
              kh <= '0;
              if (wb_v) begin
                h  <= '0;
                st <= A_LOADQ;
              end else wb_v <= 1'b1;
            end else kh <= kh + 1'b1;
          end else l <= l + 1'b1;
        end
        A_LOADQ: if (!kv_out_valid) begin
          kh  <= KH_W'(32'(h) / GRP);
          j   <= '0;
          ctx <= cur_pos + 1'b1;
          mx  <= FP_NINF;
          sum <= FP_ZERO;
          acc <= '0;
          st  <= A_SCORE;
        end
        A_SCORE: begin
          mx <= fp_max(mx, dot(q_row, k_buf[kv_row_addr]));
          if (j == ctx - 1'b1) begin j <= '0; st <= A_EXP; end
          else j <= j + 1'b1;
        end
        A_EXP: begin
          sum <= fp_add(sum, fp_exp(fp_sub(sbuf[j], mx)));
          if (j == ctx - 1'b1) begin j <= '0; st <= A_AV; end
          else j <= j + 1'b1;
        end
        A_AV: begin
          for (int d = 0; d < HD; d++)
            acc[d] <= fp_add(acc[d], fp_mul(sbuf[j], v_buf[kv_row_addr][d / LANES][d % LANES]));
          if (j == ctx - 1'b1) begin j <= '0; st <= A_NORM; end
          else j <= j + 1'b1;
        end
        A_NORM: begin
          inv <= fp_recip(sum);
          ob  <= '0;
          st  <= A_OUT;
        end
        A_OUT: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          ob <= ob + 1'b1;
          if (32'(ob) == BPR - 1) begin
            if (last_h) begin
              h <= '0;
              if (last_l) begin
                l    <= '0;
                st   <= A_IDLE;
                done <= 1'b1;
              end else begin
                l  <= l + 1'b1;
                st <= A_LOADQ;
              end
            end else begin
              h  <= h + 1'b1;
              st <= A_LOADQ;
            end
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  assign busy = (st != A_IDLE);

  // query row: rotate and pre-scale by 1/sqrt(HD) when a head starts
  always_ff @(posedge clk) begin
    if (st == A_LOADQ) begin
      fp32_t [HD-1:0] qr;
      qr = rope_rot(q_buf[32'(l) * NH + 32'(h)], rope[cur_pos]);
      for (int d = 0; d < HD; d++) q_row[d] <= fp_mul(qr[d], fp_rsqrt(fp_from_int(32'(HD))));
    end
  end

  // score buffer: raw scores, then exponentials
  always_ff @(posedge clk) begin
    if (st == A_SCORE) sbuf[j] <= dot(q_row, k_buf[kv_row_addr]);
    if (st == A_EXP)   sbuf[j] <= fp_exp(fp_sub(sbuf[j], mx));
  end

  // output registers
  always_ff @(posedge clk) begin
    if (st == A_WB && (!kv_out_valid || kv_out_ready)) begin
      kv_out_is_v <= wb_v;
      kv_out_head <= kh;
      kv_out_pos  <= wb_pos;
      kv_out_row  <= wb_v ? v_buf[rk_addr] : k_buf[rk_addr];
    end
    if (st == A_OUT && (!out_valid || out_ready)) begin
      for (int i = 0; i < LANES; i++) out_data[i] <= fp_mul(acc[32'(ob) * LANES + i], inv);
      out_tok <= l;
      out_col <= COL_W'(32'(h) * HD + 32'(ob) * LANES);
    end
  end

endmodule
