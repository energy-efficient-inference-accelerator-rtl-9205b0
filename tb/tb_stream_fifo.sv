// tb_stream_fifo -- self-checking test of the stream FIFO.
// Random pushes and pops against a queue model, with the full and empty
// flags, the count and first-word-fall-through data checked every cycle;
// the FIFO is also filled to its depth to see full and refused pushes.
module tb_stream_fifo;
  localparam int W = 32, D = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [W-1:0] din = 0, dout;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0, saw_full = 0;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic cmp();
    checks++;
    if (int'(count) != model.size() || empty != (model.size() == 0) ||
        full != (model.size() == D) || (model.size() > 0 && dout != model[0])) begin
      failures++;
      $display("FAIL count=%0d model=%0d empty=%b full=%b", count, model.size(), empty, full);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      cmp();
      if (full) saw_full++;
      // bias towards filling in the first half, draining in the second
      push = ($urandom % 4) < ((t < 1000) ? 3 : 1) && (!full || pop);
      pop  = ($urandom % 2) && !empty;
      push = push && (!full || pop);
      din  = $urandom;
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
      push = 0; pop = 0;
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
