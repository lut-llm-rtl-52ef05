// tb_idx_fifo: self-checking test of the centroid index FIFO.
// Random pushes and pops (never into a full or out of an empty FIFO)
// are compared against a queue model: head data, empty, full and count.
module tb_idx_fifo;
  localparam int W = 6, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, pop = 0, empty, full;
  logic [W-1:0] push_data = 0, pop_data;
  logic [$clog2(DEPTH):0] count;
  logic [W-1:0] model [$];

  idx_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int saw_full = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || empty != (model.size() == 0) || full != (model.size() == DEPTH)) begin
        failures++;
        $display("t=%0d count %0d model %0d", t, count, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (pop_data != model[0]) failures++;
      end
      if (full) saw_full++;
      // bias toward filling in the first half, draining in the second
      push = !full && (($urandom % 100) < (t < 1500 ? 70 : 30));
      pop  = !empty && (($urandom % 100) < (t < 1500 ? 30 : 70));
      push_data = W'($urandom);
      @(posedge clk);
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(push_data);
    end
    checks++;
    if (saw_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
