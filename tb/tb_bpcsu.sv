// tb_bpcsu: self-checking test of the parallel centroid search unit.
// Loads CA random centroids, streams random vectors back to back (one per
// cycle) and checks every returned index against a real-valued nearest
// neighbour search under the Chebyshev distance, the returned distance, the
// result order and the latency L_CHAIN + log2(CA/L_CHAIN) (18 cycles with
// the 64-centroid, 16-long-chain configuration).
module tb_bpcsu;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
  localparam int V = 2, CA = 64, L_CHAIN = 16;
  localparam int LAT = L_CHAIN + $clog2(CA / L_CHAIN);
  localparam int NV = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cb_we = 0, in_valid = 0, out_valid;
  logic [5:0] cb_addr = 0, out_idx;
  fp32_t [V-1:0] cb_data, in_vec;
  fp32_t out_dist;

  bpcsu #(.V(V), .CA(CA), .L_CHAIN(L_CHAIN)) dut (.*);

  real cen [CA][V];
  real vec [NV][V];
  int  exp_idx [NV];
  real exp_d [NV];
  bit  clear_win [NV];
  int  in_cycle [NV];
  int  cyc = 0, nout = 0;
  always @(posedge clk) cyc++;


  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference
  initial begin
    for (int c = 0; c < CA; c++)
      for (int i = 0; i < V; i++)
        cen[c][i] = f2r(r2f(rnd(-4, 4)));
    for (int n = 0; n < NV; n++) begin
      real best, second, d;
      int bi;
      best = 1e30; second = 1e30; bi = 0;
      for (int i = 0; i < V; i++)
        vec[n][i] = f2r(r2f(rnd(-5, 5)));
      for (int c = 0; c < CA; c++) begin
        d = 0;
        for (int i = 0; i < V; i++) if (rabs(vec[n][i] - cen[c][i]) > d) d = rabs(vec[n][i] - cen[c][i]);
        if (d < best) begin second = best; best = d; bi = c; end
        else if (d < second) second = d;
      end
      exp_idx[n] = bi; exp_d[n] = best; clear_win[n] = (second - best) > 1e-4;
    end
  end

  // monitor (sampled between clock edges)
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (nout < NV) begin
        checks++;
        if (cyc - in_cycle[nout] != LAT) begin
          failures++;
          $display("latency %0d expected %0d", cyc - in_cycle[nout], LAT);
        end
        if (clear_win[nout]) begin
          checks += 2;
          if (int'(out_idx) != exp_idx[nout]) begin
            failures++;
            $display("vec %0d: idx %0d expected %0d d=%f expd=%f v=%f,%f", nout, out_idx, exp_idx[nout], f2r(out_dist), exp_d[nout], vec[nout][0], vec[nout][1]);
          end
          if (rabs(f2r(out_dist) - exp_d[nout]) > 1e-4 * (1 + exp_d[nout])) failures++;
        end
      end
      nout++;
    end
  end

  initial begin
    cb_data = '0; in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int c = 0; c < CA; c++) begin
      @(negedge clk);
      cb_we = 1; cb_addr = 6'(c);
      for (int i = 0; i < V; i++) cb_data[i] = r2f(cen[c][i]);
    end
    @(negedge clk); cb_we = 0;
    for (int n = 0; n < NV; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < V; i++) in_vec[i] = r2f(vec[n][i]);
      in_cycle[n] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != NV) begin
      failures++;
      $display("got %0d results, expected %0d", nout, NV);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
