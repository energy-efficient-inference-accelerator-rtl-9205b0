// tb_exp_unit -- self-checking test of the fixed-point exponential.
// Every Q8.8 input in [-16, 11] is checked against the real exponential
// (relative error below 0.5% where the result is above 1/16, absolute
// error below 0.0004 below that) and against
// the integer reference; inputs beyond the clamp must give the clamped value.
module tb_exp_unit;
  import mann_ref_pkg::*;
  logic signed [15:0] x;
  logic [31:0] y;
  int checks = 0, failures = 0;

  exp_unit dut (.x, .y);

  initial begin
    for (int v = -16*256; v <= 11*256; v++) begin
      automatic real ideal, got;
      x = 16'(v);
      #1;
      ideal = $exp(real'(v) / 256.0);
      got   = real'(y) / 65536.0;
      checks++;
      if ((ideal > 1.0/16.0 && (got/ideal > 1.005 || got/ideal < 0.995)) ||
          (ideal <= 1.0/16.0 && (got - ideal > 0.0004 || ideal - got > 0.0004))) begin
        failures++;
        if (failures < 10) $display("FAIL exp(%f): got %f ideal %f", v/256.0, got, ideal);
      end
      checks++;
      if (longint'(y) != exp_ref(v)) begin
        failures++;
        if (failures < 10) $display("FAIL exp(%0d): got %0d ref %0d", v, y, exp_ref(v));
      end
    end
    // clamping
    x = 16'sd32767; #1; checks++;
    if (longint'(y) != exp_ref(11*256)) begin failures++; $display("FAIL upper clamp"); end
    x = -16'sd32768; #1; checks++;
    if (y != 0) begin failures++; $display("FAIL lower clamp %0d", y); end
    x = 0; #1; checks++;
    if (y != 32'h10000) begin failures++; $display("FAIL exp(0)=%h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
