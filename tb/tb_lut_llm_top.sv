// tb_lut_llm_top: end-to-end test of the accelerator on a reduced
// transformer layer (2 vector pairs of width 2, 16 activation centroids,
// 4 weight centroids, groups of 4 outputs, hidden size 8, FFN size 8,
// 4 query heads and 2 key/value heads of dimension 4, 3 new tokens after
// 1 cached position). The layer program run through the top-level ports:
//   1. input projection, activations from the input-reader port, result to
//      the RMSNorm unit (no residual yet): normalised input in the buffer;
//   2. Q, K and V projections from the buffer to the attention engine;
//   3. attention (one cached KV position prefetched, new KV rows written out);
//   4. output projection from the buffer to the RMSNorm unit with residual;
//   5. gate and up projections from the buffer to the SwiGLU unit;
//   6. down projection from the buffer to the output-writer port.
// Every stage is checked against a double-precision model computed from
// the inputs the testbench observes at that stage (engine input beats,
// projection outputs), so a near-tie in a centroid search cannot cascade.
// Tokens whose nearest centroid is a near-tie are not checked. The global
// buffer is shadowed from its write port and every buffer-sourced input
// beat is compared with the shadow. Each mechanism (both input sources,
// every destination, credit stalls, residual add, KV prefetch and
// write-out, back-pressure on the output writer and KV port) is counted;
// a mechanism that never happened counts as a failure.
module tb_lut_llm_top;
  import fp32_pkg::*;
  import lut_llm_pkg::*;
  import tb_fp_pkg::*;
  localparam int NP = 2, V = 2, CA = 16, CW = 4, G = 4, LC = 4, M_MAX = 16, D_MAX = 16;
  localparam int TOK_MAX = 4, LANES = 4, FD = 2, WR = 4, COPIES = 2;
  localparam int HIDDEN = 8, FFN = 8, HD = 4, NH = 4, NKV = 2, S_MAX = 8;
  localparam int TOK = 3, POS = 1, HALF = HD / 2, GRP = NH / NKV;
  localparam int NT_MAX = M_MAX / G, P_MAX = D_MAX / LANES, BLK = NT_MAX * CA / WR;
  localparam int IW_W = $clog2(CW);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- DUT ----------------
  logic lin_start = 0, lin_src = 0, lin_busy, lin_done, lin_pass_done;
  logic [2:0] lin_tokens = 3'(TOK), lin_groups = 0, lin_passes = 0;
  dest_e lin_dest = DEST_HBM;
  fp32_t lin_scale = 0, lin_shift = 0;
  logic ir_valid = 0, ir_ready;
  fp32_t [NP-1:0][V-1:0] ir_vecs = '0, cb_data = '0;
  logic cb_we = 0, cb_loaded = 0, lut_we = 0, widx_we = 0, lut_loaded = 0;
  logic [3:0] cb_addr = 0, lut_waddr = 0;
  logic [NP-1:0][WR*CW*8-1:0] lut_wdata = '0;
  logic [1:0] widx_waddr = 0;
  logic [NP-1:0][G-1:0][IW_W-1:0] widx_wdata = '0;
  logic ow_valid, ow_ready = 1, ow_last;
  logic [2:0] ow_tok;
  logic [3:0] ow_col;
  fp32_t [LANES-1:0] ow_data;
  logic norm_add_residual = 0, gamma_we = 0;
  logic [3:0] norm_cols = 4'(HIDDEN);
  logic [0:0] gamma_addr = 0;
  fp32_t [LANES-1:0] gamma_data = '0;
  logic attn_start = 0, attn_busy, attn_done, rope_we = 0;
  logic [2:0] attn_tokens = 3'(TOK);
  logic [3:0] attn_pos_base = 4'(POS), rope_pos = 0, kv_in_pos = 0, kv_out_pos;
  fp32_t [HALF-1:0] rope_cos = '0, rope_sin = '0;
  logic kv_in_we = 0, kv_in_is_v = 0, kv_out_valid, kv_out_ready = 1, kv_out_is_v;
  logic [0:0] kv_in_head = 0, kv_out_head;
  fp32_t [HD-1:0] kv_in_row = '0, kv_out_row;

  lut_llm_top #(.N_PAIRS(NP), .V(V), .CA(CA), .CW(CW), .G(G), .L_CHAIN(LC), .M_MAX(M_MAX),
    .D_MAX(D_MAX), .TOK_MAX(TOK_MAX), .LANES(LANES), .FIFO_DEPTH(FD), .WR_ROWS(WR),
    .ROW_COPIES(COPIES), .HIDDEN(HIDDEN), .FFN(FFN), .HD(HD), .NH(NH), .NKV(NKV), .S_MAX(S_MAX)) dut (.*);

  // ---------------- mechanism counters ----------------
  int n_src_ir = 0, n_src_buf = 0, n_credit_stall = 0, n_dest [7];
  int n_resid = 0, n_kv_in = 0, n_kv_out = 0, n_ow_bp = 0, n_kv_bp = 0, n_ow = 0;
  int n_buf_wr = 0, n_nm = 0, n_sw = 0, n_at = 0;

  // ---------------- observed data ----------------
  real xin  [P_MAX][TOK][NP][V];    // engine input beats of the current projection
  real yout [TOK][M_MAX];           // engine outputs of the current projection
  real shadow [TOK][D_MAX];         // global buffer shadow
  real nin [TOK][HIDDEN], res [TOK][HIDDEN], nout [TOK][HIDDEN], gam [HIDDEN];
  real gate [TOK][FFN], up [TOK][FFN], swo [TOK][FFN];
  real q [TOK][NH][HD], k [NKV][POS+TOK][HD], v [NKV][POS+TOK][HD], cs [S_MAX][2][HALF];
  real ao [TOK][NH*HD], kvo [2][NKV][POS+TOK][HD];
  int  in_cnt = 0;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    ow_ready     = ($urandom % 4 != 0);
    kv_out_ready = ($urandom % 3 != 0);
  end

  always @(posedge clk) if (rst_n) begin
    // engine input beats
    if (dut.lin_in_valid && dut.lin_in_ready) begin
      int p, l;
      p = in_cnt / TOK; l = in_cnt % TOK;
      for (int kk = 0; kk < NP; kk++)
        for (int i = 0; i < V; i++) xin[p][l][kk][i] = f2r(dut.lin_in_vecs[kk][i]);
      if (dut.src_q) begin
        n_src_buf++;
        for (int i = 0; i < LANES; i++) begin
          checks++;
          if (f2r(dut.lin_in_vecs[i / V][i % V]) != shadow[l][p * LANES + i]) begin
            failures++;
            $display("buffer read tok %0d col %0d differs", l, p * LANES + i);
          end
        end
      end else n_src_ir++;
      in_cnt++;
    end
    if (dut.lin_in_valid && !dut.lin_in_ready && dut.lin_busy && dut.u_lutlinear.credits == 0)
      n_credit_stall++;
    // engine outputs
    if (dut.lo_valid && dut.lo_ready) begin
      n_dest[dut.lo_dest]++;
      for (int i = 0; i < LANES; i++) begin
        real y;
        y = f2r(dut.lo_data[i]);
        yout[dut.lo_tok][dut.lo_col + i] = y;
        case (dut.lo_dest)
          DEST_ATTN_Q:   q[dut.lo_tok][(dut.lo_col + i) / HD][(dut.lo_col + i) % HD] = y;
          DEST_ATTN_K:   k[(dut.lo_col + i) / HD][POS + dut.lo_tok][(dut.lo_col + i) % HD] = y;
          DEST_ATTN_V:   v[(dut.lo_col + i) / HD][POS + dut.lo_tok][(dut.lo_col + i) % HD] = y;
          DEST_SWI_GATE: gate[dut.lo_tok][dut.lo_col + i] = y;
          DEST_SWI_UP:   up[dut.lo_tok][dut.lo_col + i] = y;
          DEST_NORM:     nin[dut.lo_tok][dut.lo_col + i] = y;
          default: ;
        endcase
      end
    end
    if (ow_valid && ow_ready) n_ow++;
    if (ow_valid && !ow_ready) n_ow_bp++;
    if (kv_out_valid && !kv_out_ready) n_kv_bp++;
    if (kv_out_valid && kv_out_ready) begin
      n_kv_out++;
      for (int d = 0; d < HD; d++) kvo[kv_out_is_v][kv_out_head][kv_out_pos][d] = f2r(kv_out_row[d]);
    end
    if (kv_in_we) n_kv_in++;
    // buffer writes by the three consumer units
    if (dut.buf_we) begin
      n_buf_wr++;
      for (int i = 0; i < LANES; i++) shadow[dut.buf_tok][dut.buf_col + i] = f2r(dut.buf_data[i]);
      for (int i = 0; i < LANES; i++)
        if (dut.nm_valid)      nout[dut.nm_tok][dut.nm_col + i] = f2r(dut.nm_data[i]);
        else if (dut.sw_valid) swo[dut.sw_tok][dut.sw_col + i] = f2r(dut.sw_data[i]);
        else                   ao[dut.at_tok][dut.at_col + i] = f2r(dut.at_data[i]);
      if (dut.nm_valid) n_nm++; else if (dut.sw_valid) n_sw++; else n_at++;
    end
  end

  // ---------------- one projection ----------------
  real             cen  [P_MAX][NP][CA][V];
  logic [7:0]      lut  [P_MAX][NP][NT_MAX][CA][CW];
  logic [IW_W-1:0] widx [P_MAX][NP][NT_MAX][G];

  task automatic projection(input bit src, input dest_e dest, input int din, input int dout);
    int passes, groups, aidx [P_MAX][TOK][NP];
    bit tie [TOK];
    real scale, shift;
    passes = din / LANES; groups = dout / G;
    scale = 1.0 / (74.0 * $sqrt(real'(passes * NP)));
    shift = -127.5 * passes * NP * scale;
    for (int p = 0; p < passes; p++)
      for (int kk = 0; kk < NP; kk++) begin
        for (int a = 0; a < CA; a++) for (int i = 0; i < V; i++) cen[p][kk][a][i] = f2r(r2f(rnd(-2, 2)));
        for (int t = 0; t < NT_MAX; t++) begin
          for (int a = 0; a < CA; a++) for (int w = 0; w < CW; w++) lut[p][kk][t][a][w] = 8'($urandom);
          for (int g = 0; g < G; g++) widx[p][kk][t][g] = IW_W'($urandom);
        end
      end
    in_cnt = 0;
    lin_src = src; lin_dest = dest; lin_groups = 3'(groups); lin_passes = 3'(passes);
    lin_scale = r2f(scale); lin_shift = r2f(shift);
    lin_start = 1;
    @(negedge clk); lin_start = 0;
    for (int p = 0; p < passes; p++) begin
      for (int a = 0; a < CA; a++) begin
        cb_we = 1; cb_addr = 4'(a);
        for (int kk = 0; kk < NP; kk++) for (int i = 0; i < V; i++) cb_data[kk][i] = r2f(cen[p][kk][a][i]);
        @(negedge clk);
      end
      cb_we = 0; cb_loaded = 1;
      @(negedge clk); cb_loaded = 0;
      fork
        if (!src) begin : feed
          for (int l = 0; l < TOK; l++) begin
            ir_valid = 1;
            for (int kk = 0; kk < NP; kk++) for (int i = 0; i < V; i++) ir_vecs[kk][i] = r2f(rnd(-2, 2));
            @(posedge clk);
            while (!ir_ready) @(posedge clk);
            @(negedge clk);
          end
          ir_valid = 0;
        end
        begin : tables
          repeat (8) @(negedge clk);
          for (int b = 0; b < BLK; b++) begin
            lut_we = 1; lut_waddr = 4'(b);
            for (int kk = 0; kk < NP; kk++)
              for (int r = 0; r < WR; r++)
                for (int w = 0; w < CW; w++)
                  lut_wdata[kk][(r*CW + w)*8 +: 8] = lut[p][kk][b / (CA/WR)][(b % (CA/WR))*WR + r][w];
            @(negedge clk);
          end
          lut_we = 0;
          for (int t = 0; t < NT_MAX; t++) begin
            widx_we = 1; widx_waddr = 2'(t);
            for (int kk = 0; kk < NP; kk++) for (int g = 0; g < G; g++) widx_wdata[kk][g] = widx[p][kk][t][g];
            @(negedge clk);
          end
          widx_we = 0; lut_loaded = 1;
          @(negedge clk); lut_loaded = 0;
        end
      join
      while (!lin_pass_done) @(negedge clk);
    end
    while (lin_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    // reference: nearest centroids of the observed inputs, table sums
    checks++;
    if (in_cnt != passes * TOK) begin failures++; $display("input beats %0d", in_cnt); end
    for (int l = 0; l < TOK; l++) begin
      tie[l] = 0;
      for (int p = 0; p < passes; p++)
        for (int kk = 0; kk < NP; kk++) begin
          real best, second, d;
          best = 1e30; second = 1e30;
          for (int c = 0; c < CA; c++) begin
            d = 0;
            for (int i = 0; i < V; i++) if (rabs(xin[p][l][kk][i] - cen[p][kk][c][i]) > d) d = rabs(xin[p][l][kk][i] - cen[p][kk][c][i]);
            if (d < best) begin second = best; best = d; aidx[p][l][kk] = c; end
            else if (d < second) second = d;
          end
          if (second - best < 1e-5 * (1.0 + best)) tie[l] = 1;
        end
    end
    for (int l = 0; l < TOK; l++) begin
      if (tie[l]) begin $display("token %0d skipped (near-tie)", l); continue; end
      for (int m = 0; m < dout; m++) begin
        longint s;
        s = 0;
        for (int p = 0; p < passes; p++)
          for (int kk = 0; kk < NP; kk++)
            s += longint'(lut[p][kk][m / G][aidx[p][l][kk]][widx[p][kk][m / G][m % G]]);
        checks++;
        if (!near(yout[l][m], real'(s) * scale + shift, 1e-4)) begin
          failures++;
          $display("projection dest %0d tok %0d col %0d: %f vs %f", dest, l, m, yout[l][m], real'(s) * scale + shift);
        end
      end
    end
  endtask

  // ---------------- stage references ----------------
  task automatic check_norm(input bit add);
    for (int l = 0; l < TOK; l++) begin
      real ss, r;
      ss = 0;
      for (int c = 0; c < HIDDEN; c++) begin
        res[l][c] = add ? res[l][c] + nin[l][c] : nin[l][c];
        ss += res[l][c] * res[l][c];
      end
      r = 1.0 / $sqrt(ss / HIDDEN + 1e-6);
      for (int c = 0; c < HIDDEN; c++) begin
        checks++;
        if (!near(nout[l][c], res[l][c] * r * gam[c], 2e-3)) begin
          failures++;
          $display("norm tok %0d col %0d: %f vs %f", l, c, nout[l][c], res[l][c] * r * gam[c]);
        end
      end
    end
  endtask

  function automatic void rot(input real x [HD], input int p, output real y [HD]);
    for (int d = 0; d < HALF; d++) begin
      y[d]        = x[d] * cs[p][0][d] - x[d+HALF] * cs[p][1][d];
      y[d + HALF] = x[d+HALF] * cs[p][0][d] + x[d] * cs[p][1][d];
    end
  endfunction

  task automatic check_attention();
    real kr [NKV][POS+TOK][HD];
    for (int g = 0; g < NKV; g++)
      for (int p = 0; p < POS + TOK; p++) begin
        real tmp [HD];
        if (p < POS) kr[g][p] = k[g][p];
        else begin
          rot(k[g][p], p, tmp); kr[g][p] = tmp;
          for (int d = 0; d < HD; d++) begin
            checks += 2;
            if (!near(kvo[0][g][p][d], kr[g][p][d], 1e-4)) begin failures++; $display("kv out K %0d %0d", g, p); end
            if (!near(kvo[1][g][p][d], v[g][p][d], 1e-6)) begin failures++; $display("kv out V %0d %0d", g, p); end
          end
        end
      end
    for (int t = 0; t < TOK; t++)
      for (int hh = 0; hh < NH; hh++) begin
        real qr [HD], s [POS+TOK], mx, sm, o;
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
          o = 0;
          for (int p = 0; p <= POS + t; p++) o += s[p] * v[hh / GRP][p][d];
          o = o / sm;
          checks++;
          if (!near(ao[t][hh * HD + d], o, 2e-3)) begin
            failures++;
            $display("attention tok %0d head %0d d %0d: %f vs %f", t, hh, d, ao[t][hh * HD + d], o);
          end
        end
      end
  endtask

  task automatic check_swiglu();
    for (int l = 0; l < TOK; l++)
      for (int c = 0; c < FFN; c++) begin
        real e;
        e = gate[l][c] / (1.0 + $exp(-gate[l][c])) * up[l][c];
        checks++;
        if (!near(swo[l][c], e, 2e-3)) begin
          failures++;
          $display("swiglu tok %0d col %0d: %f vs %f", l, c, swo[l][c], e);
        end
      end
  endtask

  task automatic wait_count(ref int cnt, input int target);
    int guard = 0;
    while (cnt < target && guard < 2000) begin @(negedge clk); guard++; end
    checks++;
    if (cnt != target) begin failures++; $display("stage output count %0d, expected %0d", cnt, target); end
  endtask

  task automatic expect_seen(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("mechanism %-22s %0d", what, n);
  endtask

  initial begin
    for (int i = 0; i < 7; i++) n_dest[i] = 0;
    for (int p = 0; p < S_MAX; p++)
      for (int d = 0; d < HALF; d++) begin
        real ang;
        ang = real'(p) * $pow(100.0, -real'(d) / HALF);
        cs[p][0][d] = f2r(r2f($cos(ang))); cs[p][1][d] = f2r(r2f($sin(ang)));
      end
    for (int c = 0; c < HIDDEN; c++) gam[c] = f2r(r2f(rnd(0.5, 1.5)));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // tables that do not depend on the layer's data
    for (int b = 0; b < HIDDEN / LANES; b++) begin
      gamma_we = 1; gamma_addr = 1'(b);
      for (int i = 0; i < LANES; i++) gamma_data[i] = r2f(gam[b * LANES + i]);
      @(negedge clk);
    end
    gamma_we = 0;
    for (int p = 0; p < S_MAX; p++) begin
      rope_we = 1; rope_pos = 4'(p);
      for (int d = 0; d < HALF; d++) begin rope_cos[d] = r2f(cs[p][0][d]); rope_sin[d] = r2f(cs[p][1][d]); end
      @(negedge clk);
    end
    rope_we = 0;
    // KV prefetch of the cached positions (keys stored rotated)
    for (int g = 0; g < NKV; g++)
      for (int p = 0; p < POS; p++)
        for (int isv = 0; isv < 2; isv++) begin
          kv_in_we = 1; kv_in_is_v = isv[0]; kv_in_head = 1'(g); kv_in_pos = 4'(p);
          for (int d = 0; d < HD; d++) begin
            real r;
            r = f2r(r2f(rnd(-1, 1)));
            if (isv) v[g][p][d] = r; else k[g][p][d] = r;
            kv_in_row[d] = r2f(r);
          end
          @(negedge clk);
        end
    kv_in_we = 0;

    // 1. input projection from the input reader to RMSNorm (no residual)
    norm_add_residual = 0;
    projection(0, DEST_NORM, HIDDEN, HIDDEN);
    wait_count(n_nm, TOK * HIDDEN / LANES);
    check_norm(0);
    // 2. Q, K, V projections from the buffer
    projection(1, DEST_ATTN_Q, HIDDEN, NH * HD);
    projection(1, DEST_ATTN_K, HIDDEN, NKV * HD);
    projection(1, DEST_ATTN_V, HIDDEN, NKV * HD);
    // 3. attention
    attn_start = 1;
    @(negedge clk); attn_start = 0;
    while (!attn_done) @(negedge clk);
    wait_count(n_kv_out, 2 * NKV * TOK);
    wait_count(n_at, TOK * NH * HD / LANES);
    check_attention();
    // 4. output projection to RMSNorm with the residual add
    norm_add_residual = 1;
    n_resid++;
    projection(1, DEST_NORM, NH * HD, HIDDEN);
    wait_count(n_nm, 2 * TOK * HIDDEN / LANES);
    check_norm(1);
    // 5. gate and up projections into SwiGLU
    projection(1, DEST_SWI_GATE, HIDDEN, FFN);
    projection(1, DEST_SWI_UP, HIDDEN, FFN);
    wait_count(n_sw, TOK * FFN / LANES);
    check_swiglu();
    // 6. down projection to the output writer
    projection(1, DEST_HBM, FFN, HIDDEN);
    checks++;
    if (n_ow != TOK * HIDDEN / LANES) begin failures++; $display("output writer beats %0d", n_ow); end

    expect_seen("input from reader", n_src_ir);
    expect_seen("input from buffer", n_src_buf);
    expect_seen("index FIFO credit stall", n_credit_stall);
    expect_seen("dest output writer", n_dest[DEST_HBM]);
    expect_seen("dest attention Q", n_dest[DEST_ATTN_Q]);
    expect_seen("dest attention K", n_dest[DEST_ATTN_K]);
    expect_seen("dest attention V", n_dest[DEST_ATTN_V]);
    expect_seen("dest SwiGLU gate", n_dest[DEST_SWI_GATE]);
    expect_seen("dest SwiGLU up", n_dest[DEST_SWI_UP]);
    expect_seen("dest RMSNorm", n_dest[DEST_NORM]);
    expect_seen("residual add", n_resid);
    expect_seen("KV prefetch", n_kv_in);
    expect_seen("KV write-out", n_kv_out);
    expect_seen("output writer stall", n_ow_bp);
    expect_seen("KV port stall", n_kv_bp);
    expect_seen("buffer writes", n_buf_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
