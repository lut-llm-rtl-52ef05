// tb_lut_llm_top_full: the accelerator at its full default size (8 vector
// pairs, 64 activation centroids in chains of 16, 16 weight centroids,
// groups of 512 outputs, 16 output lanes). A projection of 2 tokens over
// 2 hidden-dimension passes (64 input values) and 1 output group (512
// outputs) is streamed from the input-reader port to the output-writer
// port, with the output writer randomly stalling. Every output value is
// checked against a double-precision model of the centroid search and the
// lookup-table sums; tokens with a near-tie centroid are skipped.
module tb_lut_llm_top_full;
  import fp32_pkg::*;
  import lut_llm_pkg::*;
  import tb_fp_pkg::*;
  localparam int NP = 8, V = 2, CA = 64, CW = 16, G = 512, NT_MAX = 12, WR = 8, LANES = 16;
  localparam int TOK = 2, PASSES = 2, NT = 1, BLK = NT_MAX * CA / WR;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lin_start = 0, lin_src = 0, lin_busy, lin_done, lin_pass_done;
  logic [7:0] lin_tokens = 8'(TOK);
  logic [3:0] lin_groups = 4'(NT);
  logic [8:0] lin_passes = 9'(PASSES);
  dest_e lin_dest = DEST_HBM;
  fp32_t lin_scale, lin_shift;
  logic ir_valid = 0, ir_ready;
  fp32_t [NP-1:0][V-1:0] ir_vecs = '0, cb_data = '0;
  logic cb_we = 0, cb_loaded = 0, lut_we = 0, widx_we = 0, lut_loaded = 0;
  logic [5:0] cb_addr = 0;
  logic [6:0] lut_waddr = 0;
  logic [NP-1:0][WR*CW*8-1:0] lut_wdata = '0;
  logic [3:0] widx_waddr = 0;
  logic [NP-1:0][G-1:0][3:0] widx_wdata = '0;
  logic ow_valid, ow_ready = 1, ow_last;
  logic [7:0] ow_tok;
  logic [12:0] ow_col;
  fp32_t [LANES-1:0] ow_data;
  logic attn_busy, attn_done, kv_out_valid, kv_out_is_v;
  logic [2:0] kv_out_head;
  logic [8:0] kv_out_pos;
  fp32_t [127:0] kv_out_row;

  lut_llm_top dut (
    .clk, .rst_n, .lin_start, .lin_src, .lin_tokens, .lin_groups, .lin_passes, .lin_dest,
    .lin_scale, .lin_shift, .lin_busy, .lin_done, .lin_pass_done, .ir_valid, .ir_ready, .ir_vecs,
    .cb_we, .cb_addr, .cb_data, .cb_loaded, .lut_we, .lut_waddr, .lut_wdata, .widx_we, .widx_waddr,
    .widx_wdata, .lut_loaded, .ow_valid, .ow_ready, .ow_tok, .ow_col, .ow_last, .ow_data,
    .norm_add_residual(1'b0), .norm_cols(12'd2048), .gamma_we(1'b0), .gamma_addr('0), .gamma_data('0),
    .attn_start(1'b0), .attn_tokens('0), .attn_pos_base('0), .attn_busy, .attn_done,
    .rope_we(1'b0), .rope_pos('0), .rope_cos('0), .rope_sin('0),
    .kv_in_we(1'b0), .kv_in_is_v(1'b0), .kv_in_head('0), .kv_in_pos('0), .kv_in_row('0),
    .kv_out_valid, .kv_out_ready(1'b1), .kv_out_is_v, .kv_out_head, .kv_out_pos, .kv_out_row);

  real             cen  [PASSES][NP][CA][V];
  real             x    [PASSES][TOK][NP][V];
  logic [7:0]      lut  [PASSES][NP][NT_MAX][CA][CW];
  logic [3:0]      widx [PASSES][NP][NT_MAX][G];
  int outs = 0, stalls = 0;
  real scale = 1.0 / 256.0, shift = -63.75;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) ow_ready = ($urandom % 4 != 0);

  // output checker against the reference sums
  int aidx [PASSES][TOK][NP];
  bit tie [TOK];
  always @(posedge clk) if (rst_n) begin
    if (ow_valid && !ow_ready) stalls++;
    if (ow_valid && ow_ready) begin
      checks++;
      if (int'(ow_tok) != outs / (G / LANES) || int'(ow_col) != (outs % (G / LANES)) * LANES ||
          ow_last != (outs == TOK * G / LANES - 1)) begin
        failures++;
        $display("beat %0d: tok %0d col %0d", outs, ow_tok, ow_col);
      end
      if (!tie[ow_tok])
        for (int i = 0; i < LANES; i++) begin
          longint s;
          int m;
          m = int'(ow_col) + i;
          s = 0;
          for (int p = 0; p < PASSES; p++)
            for (int k = 0; k < NP; k++)
              s += longint'(lut[p][k][m / G][aidx[p][ow_tok][k]][widx[p][k][m / G][m % G]]);
          checks++;
          if (!near(f2r(ow_data[i]), real'(s) * scale + shift, 1e-5)) begin
            failures++;
            $display("tok %0d col %0d: %f vs %f", ow_tok, m, f2r(ow_data[i]), real'(s) * scale + shift);
          end
        end
      outs++;
    end
  end

  initial begin
    for (int p = 0; p < PASSES; p++)
      for (int k = 0; k < NP; k++) begin
        for (int a = 0; a < CA; a++) for (int i = 0; i < V; i++) cen[p][k][a][i] = f2r(r2f(rnd(-4, 4)));
        for (int t = 0; t < NT_MAX; t++) begin
          for (int a = 0; a < CA; a++) for (int w = 0; w < CW; w++) lut[p][k][t][a][w] = 8'($urandom);
          for (int g = 0; g < G; g++) widx[p][k][t][g] = 4'($urandom);
        end
        for (int l = 0; l < TOK; l++) for (int i = 0; i < V; i++) x[p][l][k][i] = f2r(r2f(rnd(-4, 4)));
      end
    for (int l = 0; l < TOK; l++) begin
      tie[l] = 0;
      for (int p = 0; p < PASSES; p++)
        for (int k = 0; k < NP; k++) begin
          real best, second, d;
          best = 1e30; second = 1e30;
          for (int c = 0; c < CA; c++) begin
            d = 0;
            for (int i = 0; i < V; i++) if (rabs(x[p][l][k][i] - cen[p][k][c][i]) > d) d = rabs(x[p][l][k][i] - cen[p][k][c][i]);
            if (d < best) begin second = best; best = d; aidx[p][l][k] = c; end
            else if (d < second) second = d;
          end
          if (second - best < 1e-5 * (1.0 + best)) tie[l] = 1;
        end
    end
    lin_scale = r2f(scale); lin_shift = r2f(shift);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); lin_start = 1;
    @(negedge clk); lin_start = 0;
    for (int p = 0; p < PASSES; p++) begin
      for (int a = 0; a < CA; a++) begin
        cb_we = 1; cb_addr = 6'(a);
        for (int k = 0; k < NP; k++) for (int i = 0; i < V; i++) cb_data[k][i] = r2f(cen[p][k][a][i]);
        @(negedge clk);
      end
      cb_we = 0; cb_loaded = 1;
      @(negedge clk); cb_loaded = 0;
      for (int l = 0; l < TOK; l++) begin
        ir_valid = 1;
        for (int k = 0; k < NP; k++) for (int i = 0; i < V; i++) ir_vecs[k][i] = r2f(x[p][l][k][i]);
        @(posedge clk);
        while (!ir_ready) @(posedge clk);
        @(negedge clk);
      end
      ir_valid = 0;
      for (int b = 0; b < BLK; b++) begin
        lut_we = 1; lut_waddr = 7'(b);
        for (int k = 0; k < NP; k++)
          for (int r = 0; r < WR; r++)
            for (int w = 0; w < CW; w++)
              lut_wdata[k][(r*CW + w)*8 +: 8] = lut[p][k][b / (CA/WR)][(b % (CA/WR))*WR + r][w];
        @(negedge clk);
      end
      lut_we = 0;
      for (int t = 0; t < NT_MAX; t++) begin
        widx_we = 1; widx_waddr = 4'(t);
        for (int k = 0; k < NP; k++) for (int g = 0; g < G; g++) widx_wdata[k][g] = widx[p][k][t][g];
        @(negedge clk);
      end
      widx_we = 0; lut_loaded = 1;
      @(negedge clk); lut_loaded = 0;
      while (!lin_pass_done) @(negedge clk);
    end
    while (lin_busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 3;
    if (outs != TOK * G / LANES) begin failures++; $display("outputs %0d", outs); end
    if (stalls == 0) begin failures++; $display("no output stall seen"); end
    if (tie[0] && tie[1]) begin failures++; $display("all tokens near-tie"); end
    $display("output beats %0d, writer stalls %0d", outs, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
