// tb_rmsnorm_unit: self-checking test of the residual + RMSNorm unit at
// reduced size. Token rows are first sent without residual addition (they
// become the residual), then rows are sent with residual addition. Each
// output must equal h / sqrt(mean(h^2) + eps) * gamma with h the updated
// residual, computed in double precision; the unit must also hold its
// input off while it emits a row.
module tb_rmsnorm_unit;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
  localparam int LANES = 4, H = 16, TOK_MAX = 4, TOK = 3, BPT = H / LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_add_residual = 0, gamma_we = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [1:0] gamma_addr = 0;
  fp32_t [LANES-1:0] gamma_data, in_data, out_data;
  logic [2:0] in_tok = 0, out_tok;
  logic [3:0] in_col = 0, out_col;
  real gam [H], res [TOK][H], expv [TOK][H];
  int nout = 0, held = 0;

  rmsnorm_unit #(.LANES(LANES), .H_MAX(H), .TOK_MAX(TOK_MAX)) dut (.cfg_cols(5'(H)), .*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = ($urandom % 4 != 0);
  always @(posedge clk) begin
    if (rst_n && in_valid && !in_ready) held++;
    if (rst_n && out_valid && out_ready) begin
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (!near(f2r(out_data[i]), expv[out_tok][out_col + i], 1e-3)) begin
          failures++;
          $display("tok %0d col %0d: %f vs %f", out_tok, out_col + i, f2r(out_data[i]), expv[out_tok][out_col + i]);
        end
      end
      nout++;
    end
  end

  task automatic row(int l, bit add, bit wait_out);
    real x [H];
    real ss;
    ss = 0;
    for (int c = 0; c < H; c++) begin
      x[c] = f2r(r2f(rnd(-2, 2)));
      res[l][c] = add ? res[l][c] + x[c] : x[c];
      ss += res[l][c] * res[l][c];
    end
    for (int c = 0; c < H; c++) expv[l][c] = res[l][c] / $sqrt(ss / H + 1e-6) * gam[c];
    cfg_add_residual = add;
    for (int b = 0; b < BPT; b++) begin
      in_valid = 1; in_tok = 3'(l); in_col = 4'(b * LANES);
      for (int i = 0; i < LANES; i++) in_data[i] = r2f(x[b*LANES+i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    // wait until the row has been emitted
    if (wait_out) while (nout < (add ? TOK + l + 1 : l + 1) * BPT) @(negedge clk);
  endtask

  initial begin
    gamma_data = '0; in_data = '0;
    for (int c = 0; c < H; c++) gam[c] = f2r(r2f(rnd(0.5, 1.5)));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < BPT; b++) begin
      @(negedge clk);
      gamma_we = 1; gamma_addr = 2'(b);
      for (int i = 0; i < LANES; i++) gamma_data[i] = r2f(gam[b*LANES+i]);
    end
    @(negedge clk); gamma_we = 0;
    for (int l = 0; l < TOK; l++) row(l, 0, 1);
    for (int l = 0; l < TOK - 1; l++) row(l, 1, 1);
    // the last two rows are sent back to back: the second must be held off
    row(TOK - 1, 1, 0);
    row(0, 1, 1);
    while (nout < (2 * TOK + 1) * BPT) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 2;
    if (nout != (2 * TOK + 1) * BPT) failures++;
    if (held == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
