// tb_read_module -- self-checking test of the READ module (controller).
// A random W_r is loaded; three hops are run.  Hop 1 must take the question
// embedding as key, later hops the previous h (the recurrent path).  The
// read vector is returned either before or after W_r k is finished (early
// and late r_valid); h must equal r + W_r k from the reference, and the key
// output must be the selected key.
module tb_read_module;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB;
  logic clk = 0, rst_n = 0, start = 0, first = 0, r_valid = 0, h_valid, busy;
  wload_t wload = '0;
  logic signed [E-1:0][DATA_W-1:0] q_vec = '0, r_vec = '0, key, h;
  vec_t wr[], q, hprev;
  int checks = 0, failures = 0;

  read_module #(.EMB(E)) dut (.*);

  always #5 clk = ~clk;

  function automatic vec_t rand_vec(int lo, int hi);
    vec_t v = new[E];
    foreach (v[j]) v[j] = $urandom_range(0, hi - lo) + lo;
    return v;
  endfunction

  task automatic hop(bit is_first, int r_delay);
    vec_t k, r, expv;
    int cyc = 0;
    k = is_first ? q : hprev;
    r = rand_vec(-3000, 3000);
    @(negedge clk);
    start = 1; first = is_first;
    @(negedge clk);
    start = 0;
    for (int j = 0; j < E; j++) begin
      checks++;
      if (int'(signed'(key[j])) != k[j]) begin
        failures++;
        $display("FAIL key elem %0d: got %0d expected %0d", j, signed'(key[j]), k[j]);
      end
    end
    repeat (r_delay) @(negedge clk);
    for (int j = 0; j < E; j++) r_vec[j] = DATA_W'(r[j]);
    r_valid = 1;
    @(negedge clk);
    r_valid = 0;
    while (!h_valid && cyc < 200) begin @(negedge clk); cyc++; end
    expv = controller(wr, k, r);
    for (int j = 0; j < E; j++) begin
      checks++;
      if (int'(signed'(h[j])) != expv[j]) begin
        failures++;
        $display("FAIL h elem %0d: got %0d expected %0d", j, signed'(h[j]), expv[j]);
      end
    end
    hprev = expv;
  endtask

  initial begin
    wr = new[E];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < E; i++) begin
      wr[i] = rand_vec(-100, 100);
      for (int j = 0; j < E; j++) begin
        @(negedge clk);
        wload = '{valid: 1'b1, target: T_WR, row: ROW_W'(i), col: COL_W'(j), data: DATA_W'(wr[i][j])};
      end
    end
    @(negedge clk);
    wload = '0;
    for (int s = 0; s < 4; s++) begin
      q = rand_vec(-1000, 1000);
      for (int j = 0; j < E; j++) q_vec[j] = DATA_W'(q[j]);
      hop(1, 0);            // r arrives before W_r k is done
      hop(0, 40);           // r arrives after W_r k is done
      hop(0, 5);
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
