// tb_dpe: self-checking test of one distance PE.
// Loads a random centroid, streams random vectors with random upstream
// (distance, index) pairs and checks, one cycle later, the forwarded vector,
// the Chebyshev distance decision and the minimum against a real-valued
// reference model.
module tb_dpe;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
  localparam int V = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_en = 0, in_valid = 0, out_valid;
  fp32_t [V-1:0] ld_data, in_vec, out_vec;
  fp32_t in_dist, out_dist;
  logic [5:0] in_idx, out_idx;

  dpe #(.V(V), .IDX_W(6), .MY_IDX(6'd37)) dut (.*);

  function automatic fp32_t rndf(real lo, real hi);
    return r2f(rnd(lo, hi));
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real c0, c1, x0, x1, d, din, expd;
    int  expi;
    in_dist = FP_INF; in_idx = 0; in_vec = '0; ld_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t % 50 == 0) begin
        ld_data[0] = rndf(-4, 4); ld_data[1] = rndf(-4, 4);
        ld_en = 1; in_valid = 0;
        @(negedge clk);
        ld_en = 0;
        c0 = f2r(ld_data[0]); c1 = f2r(ld_data[1]);
      end
      in_vec[0] = rndf(-6, 6); in_vec[1] = rndf(-6, 6);
      in_dist = (t % 7 == 0) ? FP_INF : rndf(0, 6);
      in_idx = 6'($urandom);
      in_valid = 1;
      x0 = f2r(in_vec[0]); x1 = f2r(in_vec[1]);
      d = (x0 - c0 < 0 ? c0 - x0 : x0 - c0);
      if ((x1 - c1 < 0 ? c1 - x1 : x1 - c1) > d) d = (x1 - c1 < 0 ? c1 - x1 : x1 - c1);
      din = (in_dist == FP_INF) ? 1.0e30 : f2r(in_dist);
      if (d < din) begin expd = d; expi = 37; end else begin expd = din; expi = int'(in_idx); end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_vec != in_vec) failures++;
      if ((d - din > 1e-4) || (din - d > 1e-4)) begin
        checks++;
        if (int'(out_idx) != expi) begin
          failures++;
          $display("idx mismatch t=%0d got %0d exp %0d d=%f din=%f", t, out_idx, expi, d, din);
        end
        if (expd < 1e29) begin
          checks++;
          if (f2r(out_dist) - expd > 1e-4 * (1 + expd) || expd - f2r(out_dist) > 1e-4 * (1 + expd))
            failures++;
        end
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
