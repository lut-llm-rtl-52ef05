// tb_swiglu_unit: self-checking test of the SwiGLU unit at reduced size.
// A gate projection for TOK tokens is streamed in, then the up projection
// in a different beat order, with random output back-pressure. Each output
// lane must equal g/(1+exp(-g)) * u computed in double precision.
module tb_swiglu_unit;
  import fp32_pkg::*;
  import lut_llm_pkg::*;
  import tb_fp_pkg::*;
  localparam int LANES = 4, COLS = 16, TOK_MAX = 4, TOK = 3, BPT = COLS / LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  dest_e in_dest = DEST_SWI_GATE;
  logic [2:0] in_tok = 0, out_tok;
  logic [3:0] in_col = 0, out_col;
  fp32_t [LANES-1:0] in_data, out_data;
  real gate [TOK][COLS], up [TOK][COLS];
  int nout = 0;

  swiglu_unit #(.LANES(LANES), .COLS(COLS), .TOK_MAX(TOK_MAX)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = ($urandom % 3 != 0);
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      for (int i = 0; i < LANES; i++) begin
        real g, e;
        g = gate[out_tok][out_col + i];
        e = g / (1.0 + $exp(-g)) * up[out_tok][out_col + i];
        checks++;
        if (!near(f2r(out_data[i]), e, 1e-3)) begin
          failures++;
          $display("tok %0d col %0d: %f vs %f", out_tok, out_col + i, f2r(out_data[i]), e);
        end
      end
      nout++;
    end
  end

  task automatic send(dest_e d, int l, int b);
    in_valid = 1; in_dest = d; in_tok = 3'(l); in_col = 4'(b * LANES);
    for (int i = 0; i < LANES; i++) in_data[i] = r2f(d == DEST_SWI_GATE ? gate[l][b*LANES+i] : up[l][b*LANES+i]);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_data = '0;
    for (int l = 0; l < TOK; l++)
      for (int c = 0; c < COLS; c++) begin
        gate[l][c] = f2r(r2f(rnd(-8, 8)));
        up[l][c]   = f2r(r2f(rnd(-3, 3)));
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < TOK; l++) for (int b = 0; b < BPT; b++) send(DEST_SWI_GATE, l, b);
    for (int l = TOK - 1; l >= 0; l--) for (int b = BPT - 1; b >= 0; b--) send(DEST_SWI_UP, l, b);
    repeat (10) @(negedge clk);
    checks++;
    if (nout != TOK * BPT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
