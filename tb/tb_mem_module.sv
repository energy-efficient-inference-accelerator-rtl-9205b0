// tb_mem_module -- self-checking test of the MEM module (soft addressing).
// Random slots are written, then reads with random keys over 0, 1, a few
// and all SLOTS valid slots are compared element by element with the
// integer reference of Eqs. 1 and 5.  The read latency is checked against
// n*(FRAC+4) + 6 cycles (2 for no valid slot).  One key is chosen so that one slot
// dominates the softmax, which must then return nearly that slot's content.
module tb_mem_module;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB, L = DEF_SLOTS;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done;
  logic [$clog2(L)-1:0] wr_slot = 0;
  logic signed [E-1:0][DATA_W-1:0] wr_a = '0, wr_c = '0, key = '0, r;
  logic [$clog2(L+1)-1:0] n_slots = 0;
  vec_t amem[], cmem[];
  int checks = 0, failures = 0;

  mem_module #(.EMB(E), .SLOTS(L)) dut (.*);

  always #5 clk = ~clk;

  function automatic vec_t rand_vec(int lo, int hi);
    vec_t v = new[E];
    foreach (v[j]) v[j] = $urandom_range(0, hi - lo) + lo;
    return v;
  endfunction

  task automatic do_read(int n, vec_t k);
    vec_t expv;
    int lat = 0, exp_lat;
    @(negedge clk);
    for (int j = 0; j < E; j++) key[j] = DATA_W'(k[j]);
    n_slots = ($clog2(L+1))'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    expv = mem_read(amem, cmem, n, k);
    for (int j = 0; j < E; j++) begin
      checks++;
      if (int'(signed'(r[j])) != expv[j]) begin
        failures++;
        $display("FAIL n=%0d elem %0d: got %0d expected %0d", n, j, signed'(r[j]), expv[j]);
      end
    end
    exp_lat = (n == 0) ? 2 : n * (FRAC + 4) + 6;
    checks++;
    if (lat != exp_lat) begin
      failures++;
      $display("FAIL latency n=%0d: %0d cycles, expected %0d", n, lat, exp_lat);
    end
  endtask

  initial begin
    amem = new[L]; cmem = new[L];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < L; i++) begin
      amem[i] = rand_vec(-200, 200);
      cmem[i] = rand_vec(-2000, 2000);
      @(negedge clk);
      wr_en = 1; wr_slot = ($clog2(L))'(i);
      for (int j = 0; j < E; j++) begin
        wr_a[j] = DATA_W'(amem[i][j]);
        wr_c[j] = DATA_W'(cmem[i][j]);
      end
    end
    @(negedge clk);
    wr_en = 0;
    do_read(0, rand_vec(-100, 100));
    do_read(1, rand_vec(-100, 100));
    for (int t = 0; t < 6; t++) do_read($urandom_range(2, L), rand_vec(-150, 150));
    do_read(L, rand_vec(-150, 150));
    // a key aligned with slot 3 makes slot 3 dominate
    begin
      vec_t k = new[E];
      vec_t expv;
      foreach (k[j]) k[j] = (amem[3][j] > 0) ? 256 : -256;
      do_read(L, k);
      checks++;
      if ((int'(signed'(r[0])) - cmem[3][0]) > 64 || (cmem[3][0] - int'(signed'(r[0]))) > 64) begin
        failures++;
        $display("FAIL dominant slot: r0=%0d c3=%0d", signed'(r[0]), cmem[3][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
