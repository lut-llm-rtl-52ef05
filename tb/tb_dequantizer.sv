// tb_dequantizer: self-checking test of the INT-to-FP32 dequantizer.
// Random signed sums, scale and shift are converted; each lane must equal
// acc*scale + shift within FP32 truncation error, tags must pass through,
// and the output must hold while out_ready is low.
module tb_dequantizer;
  import fp32_pkg::*;
  import tb_fp_pkg::*;
  localparam int LANES = 4, ACC_W = 32, TAG_W = 8, N = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fp32_t scale, shift;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [LANES-1:0][ACC_W-1:0] in_data;
  logic [TAG_W-1:0] in_tag, out_tag;
  fp32_t [LANES-1:0] out_data;
  real exp_v [N][LANES];

  dequantizer #(.LANES(LANES), .ACC_W(ACC_W), .TAG_W(TAG_W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer with random back-pressure
  initial begin
    int n = 0;
    @(posedge rst_n);
    while (n < N) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_tag != 8'(n)) failures++;
        for (int i = 0; i < LANES; i++) begin
          checks++;
          if (!near(f2r(out_data[i]), exp_v[n][i], 1e-5)) begin
            failures++;
            $display("n %0d lane %0d: %f vs %f", n, i, f2r(out_data[i]), exp_v[n][i]);
          end
        end
        n++;
      end
    end
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data = '0; in_tag = '0;
    scale = r2f(0.0123); shift = r2f(-3.5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      in_valid = 1; in_tag = 8'(n);
      for (int i = 0; i < LANES; i++) begin
        int v;
        v = int'($urandom % 200000) - 100000;
        in_data[i] = ACC_W'(v);
        exp_v[n][i] = f2r(r2f(real'(v))) * f2r(scale) + f2r(shift);
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  end
endmodule
