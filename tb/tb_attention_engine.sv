// tb_attention_engine: self-checking test of the attention engine at
// reduced size (head dimension 8, 4 query heads sharing 2 key/value heads).
// POS cached positions are prefetched, then the queries, keys and values of
// TOK new tokens are streamed in and the engine started. Checked against a
// double-precision model: the rotated keys and the values written out for
// the KV cache, and every output element of causal grouped-query attention
// with rotate-half RoPE, softmax(q.k/sqrt(HD)) and the value sum.
module tb_attention_engine;
  import fp32_pkg::*;
  import lut_llm_pkg::*;
  import tb_fp_pkg::*;
  localparam int HD = 8, NH = 4, NKV = 2, S_MAX = 8, TOK_MAX = 4, LANES = 4;
  localparam int POS = 3, TOK = 2, HALF = HD / 2, GRP = NH / NKV;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, in_valid = 0, in_ready, rope_we = 0, kv_in_we = 0, kv_in_is_v = 0;
  dest_e in_dest = DEST_ATTN_Q;
  logic [2:0] in_tok = 0, out_tok;
  logic [4:0] in_col = 0, out_col;
  fp32_t [LANES-1:0] in_data, out_data;
  logic [3:0] rope_pos = 0, kv_in_pos = 0, kv_out_pos;
  fp32_t [HALF-1:0] rope_cos, rope_sin;
  logic kv_in_head = 0, kv_out_head, kv_out_valid, kv_out_ready = 1, kv_out_is_v, out_valid, out_ready = 1;
  fp32_t [HD-1:0] kv_in_row, kv_out_row;

  attention_engine #(.HD(HD), .NH(NH), .NKV(NKV), .S_MAX(S_MAX), .TOK_MAX(TOK_MAX), .LANES(LANES)) dut (
    .cfg_tokens(3'(TOK)), .cfg_pos_base(4'(POS)), .*);

  real q [TOK][NH][HD], k [NKV][S_MAX][HD], v [NKV][S_MAX][HD], cs [S_MAX][2][HALF];
  real kr [NKV][S_MAX][HD], o [TOK][NH][HD];
  int nkv = 0, nout = 0;

  function automatic void rot(input real x [HD], input int p, output real y [HD]);
    for (int d = 0; d < HALF; d++) begin
      y[d]        = x[d] * cs[p][0][d] - x[d+HALF] * cs[p][1][d];
      y[d + HALF] = x[d+HALF] * cs[p][0][d] + x[d] * cs[p][1][d];
    end
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    kv_out_ready = ($urandom % 3 != 0);
    out_ready = ($urandom % 3 != 0);
  end
  always @(posedge clk) begin
    if (rst_n && kv_out_valid && kv_out_ready) begin
      for (int d = 0; d < HD; d++) begin
        real e;
        e = kv_out_is_v ? v[kv_out_head][kv_out_pos][d] : kr[kv_out_head][kv_out_pos][d];
        checks++;
        if (!near(f2r(kv_out_row[d]), e, 1e-4) || kv_out_pos < POS) failures++;
      end
      nkv++;
    end
    if (rst_n && out_valid && out_ready) begin
      for (int i = 0; i < LANES; i++) begin
        real e;
        e = o[out_tok][out_col / HD][out_col % HD + i];
        checks++;
        if (!near(f2r(out_data[i]), e, 2e-3)) begin
          failures++;
          $display("tok %0d col %0d: %f vs %f", out_tok, out_col + i, f2r(out_data[i]), e);
        end
      end
      nout++;
    end
  end

  task automatic beat(dest_e d, int t, int c, real src [HD], int off);
    in_valid = 1; in_dest = d; in_tok = 3'(t); in_col = 5'(c);
    for (int i = 0; i < LANES; i++) in_data[i] = r2f(src[off + i]);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_data = '0; rope_cos = '0; rope_sin = '0; kv_in_row = '0;
    for (int p = 0; p < S_MAX; p++)
      for (int d = 0; d < HALF; d++) begin
        real ang;
        ang = real'(p) * $pow(100.0, -real'(d) / HALF);
        cs[p][0][d] = f2r(r2f($cos(ang))); cs[p][1][d] = f2r(r2f($sin(ang)));
      end
    for (int g = 0; g < NKV; g++)
      for (int p = 0; p < POS + TOK; p++) begin
        real tmp [HD];
        for (int d = 0; d < HD; d++) begin k[g][p][d] = f2r(r2f(rnd(-1, 1))); v[g][p][d] = f2r(r2f(rnd(-1, 1))); end
        // cached keys are stored already rotated; new keys are rotated by the engine
        if (p < POS) kr[g][p] = k[g][p];
        else begin rot(k[g][p], p, tmp); kr[g][p] = tmp; end
      end
    for (int t = 0; t < TOK; t++)
      for (int hh = 0; hh < NH; hh++) begin
        real qr [HD], s [S_MAX], mx, sm;
        for (int d = 0; d < HD; d++) q[t][hh][d] = f2r(r2f(rnd(-2, 2)));
        rot(q[t][hh], POS + t, qr);
        mx = -1e30; sm = 0;
        for (int p = 0; p <= POS + t; p++) begin
          s[p] = 0;
          for (int d = 0; d < HD; d++) s[p] += qr[d] * kr[hh / GRP][p][d];
          s[p] = s[p] / $sqrt(HD);
          if (s[p] > mx) mx = s[p];
        end
        for (int p = 0; p <= POS + t; p++) begin s[p] = $exp(s[p] - mx); sm += s[p]; end
        for (int d = 0; d < HD; d++) begin
          o[t][hh][d] = 0;
          for (int p = 0; p <= POS + t; p++) o[t][hh][d] += s[p] * v[hh / GRP][p][d];
          o[t][hh][d] = o[t][hh][d] / sm;
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < S_MAX; p++) begin
      rope_we = 1; rope_pos = 4'(p);
      for (int d = 0; d < HALF; d++) begin rope_cos[d] = r2f(cs[p][0][d]); rope_sin[d] = r2f(cs[p][1][d]); end
      @(negedge clk);
    end
    rope_we = 0;
    for (int g = 0; g < NKV; g++)
      for (int p = 0; p < POS; p++)
        for (int isv = 0; isv < 2; isv++) begin
          kv_in_we = 1; kv_in_is_v = isv[0]; kv_in_head = g[0]; kv_in_pos = 4'(p);
          for (int d = 0; d < HD; d++) kv_in_row[d] = r2f(isv ? v[g][p][d] : kr[g][p][d]);
          @(negedge clk);
        end
    kv_in_we = 0;
    for (int t = 0; t < TOK; t++)
      for (int hh = 0; hh < NH; hh++)
        for (int b = 0; b < HD / LANES; b++) beat(DEST_ATTN_Q, t, hh * HD + b * LANES, q[t][hh], b * LANES);
    for (int t = 0; t < TOK; t++)
      for (int g = 0; g < NKV; g++)
        for (int b = 0; b < HD / LANES; b++) begin
          beat(DEST_ATTN_K, t, g * HD + b * LANES, k[g][POS + t], b * LANES);
          beat(DEST_ATTN_V, t, g * HD + b * LANES, v[g][POS + t], b * LANES);
        end
    start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 2;
    if (nkv != 2 * NKV * TOK) begin failures++; $display("kv rows %0d", nkv); end
    if (nout != TOK * NH * HD / LANES) begin failures++; $display("outs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
