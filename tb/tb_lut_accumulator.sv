// tb_lut_accumulator: self-checking test of the accumulator/output buffer.
// Reduced sizes. Three passes of random partial sums for TOK tokens x NT
// groups are accumulated (the first pass overwrites stale contents), then
// the buffer is drained with random back-pressure; every beat's data,
// destination tag, token, column and last flag are checked against a model.
module tb_lut_accumulator;
  import lut_llm_pkg::*;
  localparam int G = 8, ACC_W = 32, TOK_MAX = 4, NT_MAX = 3, LANES = 4;
  localparam int TOK = 3, NT = 2, PASSES = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pass_start = 0, first_pass = 0, in_valid = 0, in_last = 0, drain_start = 0;
  logic [1:0] in_grp = 0;
  logic [G-1:0][ACC_W-1:0] in_vals = '0;
  dest_e drain_dest = DEST_SWI_UP, out_dest;
  logic drain_busy, out_valid, out_ready = 0, out_last;
  logic [$clog2(TOK_MAX+1)-1:0] out_tok;
  logic [$clog2(NT_MAX*G)-1:0] out_col;
  logic [LANES-1:0][ACC_W-1:0] out_data;
  int model [TOK][NT*G];

  lut_accumulator #(.G(G), .ACC_W(ACC_W), .TOK_MAX(TOK_MAX), .NT_MAX(NT_MAX), .LANES(LANES)) dut (
    .clk, .rst_n, .cfg_tokens(3'(TOK)), .cfg_groups(2'(NT)), .pass_start, .first_pass, .in_valid,
    .in_grp, .in_last, .in_vals, .drain_start, .drain_dest, .drain_busy, .out_valid, .out_ready,
    .out_dest, .out_tok, .out_col, .out_last, .out_data);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int beats = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < PASSES; p++) begin
      @(negedge clk); pass_start = 1; first_pass = (p == 0);
      @(negedge clk); pass_start = 0;
      for (int l = 0; l < TOK; l++)
        for (int t = 0; t < NT; t++) begin
          in_valid = 1; in_grp = 2'(t); in_last = (t == NT - 1);
          for (int g = 0; g < G; g++) begin
            int v;
            v = int'($urandom % 2000) - 1000;
            in_vals[g] = ACC_W'(v);
            model[l][t*G + g] = (p == 0 ? 0 : model[l][t*G + g]) + v;
          end
          @(negedge clk);
          if ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
        end
      in_valid = 0;
    end
    @(negedge clk); drain_start = 1;
    @(negedge clk); drain_start = 0;
    while (beats < TOK * NT * G / LANES) begin
      out_ready = ($urandom % 3 != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        int l, c;
        l = beats / (NT * G / LANES); c = (beats % (NT * G / LANES)) * LANES;
        checks++;
        if (int'(out_tok) != l || int'(out_col) != c || out_dest != DEST_SWI_UP ||
            out_last != (beats == TOK * NT * G / LANES - 1)) begin
          failures++; $display("beat %0d tag tok %0d col %0d", beats, out_tok, out_col);
        end
        for (int i = 0; i < LANES; i++) begin
          checks++;
          if (int'(signed'(out_data[i])) != model[l][c + i]) failures++;
        end
        beats++;
      end
      @(negedge clk);
    end
    out_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid || drain_busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
