// tb_lutlinear_engine: end-to-end test of the LUTLinear engine at reduced
// sizes (2 pairs, 16 centroids in chains of 4, 4 weight centroids, groups of
// 8 outputs). A projection of TOK tokens, NT groups and PASSES
// hidden-dimension passes is run. For every pass the codebooks are loaded
// first and the input vectors streamed while the lookup tables are still
// being loaded, so the centroid search runs ahead of the table lookups and
// the input is stalled by the index-FIFO credits. The reference computes the
// nearest centroids and table sums independently and expects
// float(sum)*scale + shift on every output.
module tb_lutlinear_engine;
  import fp32_pkg::*;
  import lut_llm_pkg::*;
  import tb_fp_pkg::*;
  localparam int NP = 2, V = 2, CA = 16, CW = 4, G = 8, LC = 4, NT_MAX = 3, P_MAX = 4;
  localparam int TOK_MAX = 4, LANES = 4, FD = 2, WR = 4, COPIES = 2;
  localparam int TOK = 4, NT = 2, PASSES = 3;
  localparam int IW_W = $clog2(CW), BLK_W = $clog2(NT_MAX * CA / WR);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, pass_done;
  logic in_valid = 0, in_ready, cb_we = 0, cb_loaded = 0, lut_we = 0, widx_we = 0, lut_loaded = 0;
  fp32_t [NP-1:0][V-1:0] in_vecs, cb_data;
  logic [3:0] cb_addr = 0;
  logic [BLK_W-1:0] lut_waddr = 0;
  logic [NP-1:0][WR*CW*8-1:0] lut_wdata;
  logic [1:0] widx_waddr = 0;
  logic [NP-1:0][G-1:0][IW_W-1:0] widx_wdata;
  logic out_valid, out_ready = 1, out_last;
  dest_e out_dest;
  logic [2:0] out_tok;
  logic [$clog2(NT_MAX*G)-1:0] out_col;
  fp32_t [LANES-1:0] out_data;

  lutlinear_engine #(.N_PAIRS(NP), .V(V), .CA(CA), .CW(CW), .G(G), .L_CHAIN(LC), .NT_MAX(NT_MAX),
    .P_MAX(P_MAX), .TOK_MAX(TOK_MAX), .ACC_W(32), .LANES(LANES), .FIFO_DEPTH(FD), .WR_ROWS(WR),
    .ROW_COPIES(COPIES)) dut (
    .clk, .rst_n, .start, .cfg_tokens(3'(TOK)), .cfg_groups(2'(NT)), .cfg_passes(3'(PASSES)),
    .cfg_dest(DEST_ATTN_K), .cfg_scale(r2f(0.5)), .cfg_shift(r2f(-10.0)), .busy, .done, .pass_done,
    .in_valid, .in_ready, .in_vecs, .cb_we, .cb_addr, .cb_data, .cb_loaded, .lut_we, .lut_waddr,
    .lut_wdata, .widx_we, .widx_waddr, .widx_wdata, .lut_loaded, .out_valid, .out_ready, .out_dest,
    .out_tok, .out_col, .out_last, .out_data);

  real             cen  [PASSES][NP][CA][V];
  real             x    [PASSES][TOK][NP][V];
  int              aidx [PASSES][TOK][NP];
  logic [7:0]      lut  [PASSES][NP][NT_MAX][CA][CW];
  logic [IW_W-1:0] widx [PASSES][NP][NT_MAX][G];
  longint          expo [TOK][NT*G];
  int stalls = 0, outs = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (in_valid && !in_ready && busy) stalls++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int l, c;
      l = outs / (NT * G / LANES); c = (outs % (NT * G / LANES)) * LANES;
      checks++;
      if (int'(out_tok) != l || int'(out_col) != c || out_dest != DEST_ATTN_K ||
          out_last != (outs == TOK * NT * G / LANES - 1)) failures++;
      for (int i = 0; i < LANES; i++) begin
        real e;
        e = real'(expo[l][c + i]) * 0.5 - 10.0;
        checks++;
        if (!near(f2r(out_data[i]), e, 1e-5)) begin
          failures++;
          $display("tok %0d col %0d: %f vs %f", l, c + i, f2r(out_data[i]), e);
        end
      end
      outs++;
    end
  end

  initial begin
    // ---- stimulus and reference ----
    for (int p = 0; p < PASSES; p++)
      for (int k = 0; k < NP; k++) begin
        for (int a = 0; a < CA; a++) for (int i = 0; i < V; i++) cen[p][k][a][i] = f2r(r2f(rnd(-8, 8)));
        for (int t = 0; t < NT_MAX; t++) begin
          for (int a = 0; a < CA; a++) for (int w = 0; w < CW; w++) lut[p][k][t][a][w] = 8'($urandom);
          for (int g = 0; g < G; g++) widx[p][k][t][g] = IW_W'($urandom);
        end
        for (int l = 0; l < TOK; l++) begin
          real best, d;
          int a;
          // a point near a random centroid; the nearest one is found by search
          a = $urandom % CA;
          for (int i = 0; i < V; i++) x[p][l][k][i] = f2r(r2f(cen[p][k][a][i] + rnd(-0.3, 0.3)));
          best = 1e30;
          for (int c = 0; c < CA; c++) begin
            d = 0;
            for (int i = 0; i < V; i++) if (rabs(x[p][l][k][i] - cen[p][k][c][i]) > d) d = rabs(x[p][l][k][i] - cen[p][k][c][i]);
            if (d < best) begin best = d; aidx[p][l][k] = c; end
          end
        end
      end
    for (int l = 0; l < TOK; l++)
      for (int m = 0; m < NT * G; m++) begin
        expo[l][m] = 0;
        for (int p = 0; p < PASSES; p++)
          for (int k = 0; k < NP; k++)
            expo[l][m] += longint'(lut[p][k][m / G][aidx[p][l][k]][widx[p][k][m / G][m % G]]);
      end
    in_vecs = '0; cb_data = '0; lut_wdata = '0; widx_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int p = 0; p < PASSES; p++) begin
      // codebooks
      for (int a = 0; a < CA; a++) begin
        cb_we = 1; cb_addr = 4'(a);
        for (int k = 0; k < NP; k++) for (int i = 0; i < V; i++) cb_data[k][i] = r2f(cen[p][k][a][i]);
        @(negedge clk);
      end
      cb_we = 0; cb_loaded = 1;
      @(negedge clk); cb_loaded = 0;
      fork
        begin : feed
          for (int l = 0; l < TOK; l++) begin
            in_valid = 1;
            for (int k = 0; k < NP; k++) for (int i = 0; i < V; i++) in_vecs[k][i] = r2f(x[p][l][k][i]);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
          end
          in_valid = 0;
        end
        begin : tables
          repeat (6) @(negedge clk);
          for (int b = 0; b < NT_MAX * CA / WR; b++) begin
            lut_we = 1; lut_waddr = BLK_W'(b);
            for (int k = 0; k < NP; k++)
              for (int r = 0; r < WR; r++)
                for (int w = 0; w < CW; w++)
                  lut_wdata[k][(r*CW + w)*8 +: 8] = lut[p][k][b / (CA/WR)][(b % (CA/WR))*WR + r][w];
            @(negedge clk);
          end
          lut_we = 0;
          for (int t = 0; t < NT_MAX; t++) begin
            widx_we = 1; widx_waddr = 2'(t);
            for (int k = 0; k < NP; k++) for (int g = 0; g < G; g++) widx_wdata[k][g] = widx[p][k][t][g];
            @(negedge clk);
          end
          widx_we = 0; lut_loaded = 1;
          @(negedge clk); lut_loaded = 0;
        end
      join
      while (!pass_done) @(negedge clk);
    end
    while (!done) @(negedge clk);
    checks += 3;
    if (outs != TOK * NT * G / LANES) begin failures++; $display("outs %0d", outs); end
    if (stalls == 0) begin failures++; $display("no credit stall seen"); end
    if (busy) failures++;
    $display("credit stalls: %0d cycles", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
