// tb_psum2d: self-checking test of the 2D lookup-table prefix-sum engine.
// Two engines are cascaded (a FIRST engine feeding a cascaded one), with
// reduced sizes. Random 2D tables and weight-centroid indices are loaded,
// then random activation indices are offered to both engines. Every output
// group of the second engine is compared with
//   lut0[t][a0][w0[t][g]] + lut1[t][a1][w1[t][g]]
// computed from the loaded contents, and the cascade latency (4 cycles per
// engine) and the index pop after the last group are checked. Table access
// is gated by en until the tables are marked loaded.
module tb_psum2d;
  localparam int CA = 16, CW = 4, G = 8, NT_MAX = 3, ACC_W = 32, WR = 4, COPIES = 2;
  localparam int IW_W = $clog2(CW), NT = 3, NTOK = 40;
  localparam int BLK_W = $clog2(NT_MAX * CA / WR);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]      lut  [2][NT_MAX][CA][CW];
  logic [IW_W-1:0] widx [2][NT_MAX][G];
  int              act  [2][NTOK];

  logic lut_we = 0, widx_we = 0, en = 0;
  logic [BLK_W-1:0] lut_waddr = 0;
  logic [1:0] widx_waddr = 0;
  logic [WR*CW*8-1:0] lut_wdata [2];
  logic [G-1:0][IW_W-1:0] widx_wdata [2];
  logic idx_valid [2], idx_pop [2];
  logic [3:0] idx [2];
  logic cv [3], cl [3];
  logic [1:0] cg [3];
  logic [G-1:0][ACC_W-1:0] cd [3];
  int rd_ptr [2];

  assign cv[0] = 0; assign cg[0] = 0; assign cd[0] = '0; assign cl[0] = 0;

  for (genvar k = 0; k < 2; k++) begin : g_e
    assign idx_valid[k] = rd_ptr[k] < NTOK;
    assign idx[k] = 4'(act[k][rd_ptr[k] < NTOK ? rd_ptr[k] : 0]);
    psum2d #(.CA(CA), .CW(CW), .G(G), .NT_MAX(NT_MAX), .ACC_W(ACC_W), .WR_ROWS(WR),
             .ROW_COPIES(COPIES), .FIRST(k == 0)) dut (
      .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata(lut_wdata[k]), .widx_we, .widx_waddr,
      .widx_wdata(widx_wdata[k]), .cfg_groups(2'(NT)), .en,
      .idx_valid(idx_valid[k]), .idx(idx[k]), .idx_pop(idx_pop[k]),
      .cas_in_valid(cv[k]), .cas_in_grp(cg[k]), .cas_in(cd[k]),
      .cas_out_valid(cv[k+1]), .cas_out_grp(cg[k+1]), .cas_out_last(cl[k+1]), .cas_out(cd[k+1]));
    always @(posedge clk) if (rst_n && idx_pop[k]) rd_ptr[k] <= rd_ptr[k] + 1;
  end

  int cyc = 0, en_cyc = 0, nout = 0, first_out_cyc = -1;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && cv[2]) begin
      int tok, t;
      tok = nout / NT; t = nout % NT;
      if (first_out_cyc < 0) first_out_cyc = cyc;
      checks++;
      if (int'(cg[2]) != t || cl[2] != (t == NT - 1)) failures++;
      for (int g = 0; g < G; g++) begin
        int e;
        e = int'(lut[0][t][act[0][tok]][widx[0][t][g]]) + int'(lut[1][t][act[1][tok]][widx[1][t][g]]);
        checks++;
        if (int'(cd[2][g]) != e) begin
          failures++;
          if (failures < 5) $display("tok %0d grp %0d lane %0d: %0d vs %0d", tok, t, g, cd[2][g], e);
        end
      end
      nout++;
    end
  end

  initial begin
    rd_ptr[0] = 0; rd_ptr[1] = 0;
    for (int k = 0; k < 2; k++) begin
      for (int t = 0; t < NT_MAX; t++) begin
        for (int a = 0; a < CA; a++) for (int w = 0; w < CW; w++) lut[k][t][a][w] = 8'($urandom);
        for (int g = 0; g < G; g++) widx[k][t][g] = IW_W'($urandom);
      end
      for (int n = 0; n < NTOK; n++) act[k][n] = $urandom % CA;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load tables: block b holds rows (b*WR .. b*WR+WR-1) of table b/(CA/WR)
    for (int b = 0; b < NT_MAX * CA / WR; b++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = BLK_W'(b);
      for (int k = 0; k < 2; k++)
        for (int r = 0; r < WR; r++)
          for (int w = 0; w < CW; w++)
            lut_wdata[k][(r*CW + w)*8 +: 8] = lut[k][b / (CA/WR)][(b % (CA/WR))*WR + r][w];
    end
    for (int t = 0; t < NT_MAX; t++) begin
      @(negedge clk);
      lut_we = 0; widx_we = 1; widx_waddr = 2'(t);
      for (int k = 0; k < 2; k++) for (int g = 0; g < G; g++) widx_wdata[k][g] = widx[k][t][g];
    end
    @(negedge clk); widx_we = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (nout != 0 || rd_ptr[0] != 0) failures++;   // nothing may happen before en
    en = 1; en_cyc = cyc;
    repeat (NTOK * NT + 20) @(negedge clk);
    checks += 3;
    if (nout != NTOK * NT) begin failures++; $display("outputs %0d", nout); end
    if (rd_ptr[0] != NTOK || rd_ptr[1] != NTOK) failures++;
    // en at negedge cyc=e, engine 0 fires at edge e+1, out after 4 more, engine 1 after 8
    if (first_out_cyc - en_cyc != 8) begin failures++; $display("latency %0d", first_out_cyc - en_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
