// tb_frac_divider -- self-checking test of the sequential softmax divider.
// Random num <= den pairs, plus num == den and num == 0, are compared with
// floor(num*256/den); the latency from start to done must be FRAC+1 = 9
// cycles.
module tb_frac_divider;
  localparam int NUM_W = 38, FRAC = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [NUM_W-1:0] num, den;
  logic [FRAC:0] q;
  int checks = 0, failures = 0;

  frac_divider #(.NUM_W(NUM_W), .FRAC(FRAC)) dut (.*);

  always #5 clk = ~clk;

  task automatic run(longint n, longint d);
    int lat = 0;
    longint expq = (n * 256) / d;
    @(negedge clk);
    num = NUM_W'(n); den = NUM_W'(d); start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (longint'(q) != expq) begin
      failures++;
      $display("FAIL %0d/%0d: got %0d expected %0d", n, d, q, expq);
    end
    checks++;
    if (lat != FRAC + 1) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
  endtask

  initial begin
    num = 0; den = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5, 5);
    run(0, 77);
    run(1, 3);
    for (int t = 0; t < 300; t++) begin
      automatic longint d = longint'({$urandom, $urandom}) & ((64'd1 << 37) - 1);
      automatic longint n;
      if (d == 0) d = 1;
      n = (longint'({$urandom, $urandom}) & ((64'd1 << 37) - 1)) % (d + 1);
      run(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
