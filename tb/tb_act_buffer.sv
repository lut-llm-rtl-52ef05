// tb_act_buffer: self-checking test of the global activation buffer at a
// reduced size (4 lanes, 16 features, 4 tokens). Random writes and reads
// are compared with a model array; a read in the cycle after a write to
// the same word must return the new data.
module tb_act_buffer;
  import fp32_pkg::*;
  localparam int LANES = 4, D_MAX = 16, TOK_MAX = 4, BPT = D_MAX / LANES;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0;
  logic [2:0] wr_tok = 0, rd_tok = 0;
  logic [3:0] wr_col = 0;
  logic [1:0] rd_beat = 0;
  fp32_t [LANES-1:0] wr_data = '0, rd_data;
  fp32_t [LANES-1:0] model [TOK_MAX][BPT];
  bit written [TOK_MAX][BPT];

  act_buffer #(.LANES(LANES), .D_MAX(D_MAX), .TOK_MAX(TOK_MAX)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < TOK_MAX; t++) for (int b = 0; b < BPT; b++) written[t][b] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check the read issued this cycle against the model
      if (written[rd_tok][rd_beat]) begin
        checks++;
        if (rd_data != model[rd_tok][rd_beat]) begin
          failures++;
          $display("read tok %0d beat %0d wrong", rd_tok, rd_beat);
        end
      end
      // next write and read
      wr_en = ($urandom % 2 == 0);
      wr_tok = 3'($urandom % TOK_MAX);
      wr_col = 4'(($urandom % BPT) * LANES);
      for (int i = 0; i < LANES; i++) wr_data[i] = $urandom;
      if (wr_en) begin
        model[wr_tok][wr_col / LANES] = wr_data;
        written[wr_tok][wr_col / LANES] = 1;
      end
      @(posedge clk);
      #1;
      wr_en = 0;
      // half the time read back the word just written
      if ($urandom % 2 == 0) begin rd_tok = wr_tok; rd_beat = 2'(wr_col / LANES); end
      else begin rd_tok = 3'($urandom % TOK_MAX); rd_beat = 2'($urandom % BPT); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
