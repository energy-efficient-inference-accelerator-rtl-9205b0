// tb_dot_product -- self-checking test of the multiplier/adder tree.
// Random and extreme vectors of the default length 20 (padded tree of 32
// leaves) are compared with a 64-bit integer sum of products.
module tb_dot_product;
  import mann_ref_pkg::*;
  localparam int N = 20;
  logic signed [N-1:0][15:0] a, b;
  logic signed [39:0] y;
  int checks = 0, failures = 0;

  dot_product #(.N(N), .DATA_W(16), .ACC_W(40)) dut (.a, .b, .y);

  task automatic check();
    vec_t va = new[N], vb = new[N];
    longint exp_y;
    #1;
    for (int i = 0; i < N; i++) begin va[i] = int'(signed'(a[i])); vb[i] = int'(signed'(b[i])); end
    exp_y = dot(va, vb);
    checks++;
    if (longint'(y) != exp_y) begin
      failures++;
      $display("FAIL dot: got %0d expected %0d", y, exp_y);
    end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = 16'($urandom);
        b[i] = 16'($urandom);
      end
      check();
    end
    // extremes: all -32768 squared
    for (int i = 0; i < N; i++) begin a[i] = 16'sh8000; b[i] = 16'sh8000; end
    check();
    for (int i = 0; i < N; i++) begin a[i] = 16'sh7fff; b[i] = 16'sh8000; end
    check();
    // single element position
    for (int k = 0; k < N; k++) begin
      a = '0; b = '0; a[k] = 16'sd300; b[k] = -16'sd7;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
