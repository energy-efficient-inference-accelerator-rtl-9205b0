// tb_output_module -- self-checking test of the OUTPUT module.
// Random W_o, thresholds and a random permutation as index order are
// loaded.  Searches without thresholding must return the argmax after
// computing all VOCAB logits in VOCAB+5 cycles; searches with thresholding
// must return the label, the number of logits computed and the early flag
// of the reference search (Algorithm 1, step 4).  Both early exits and
// searches where no threshold is passed are provoked and counted.
module tb_output_module;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB, V = DEF_VOCAB;
  logic clk = 0, rst_n = 0, start = 0, ith_en = 0, done, early, busy;
  wload_t wload = '0;
  logic signed [E-1:0][DATA_W-1:0] h = '0;
  logic [$clog2(V)-1:0] label;
  logic [$clog2(V+1)-1:0] n_cmp;
  vec_t wo[];
  int theta[], order[];
  int checks = 0, failures = 0, n_early = 0, n_full = 0;

  output_module #(.EMB(E), .VOCAB(V)) dut (.*);

  always #5 clk = ~clk;

  task automatic load(wtarget_e t, int row, int col, int d);
    @(negedge clk);
    wload = '{valid: 1'b1, target: t, row: ROW_W'(row), col: COL_W'(col), data: DATA_W'(d)};
  endtask

  task automatic search_once(bit ith);
    vec_t hv = new[E];
    int exp_label, exp_n, lat = 0;
    bit exp_early;
    foreach (hv[j]) begin hv[j] = $urandom_range(0, 1024) - 512; h[j] = DATA_W'(hv[j]); end
    @(negedge clk);
    ith_en = ith; start = 1;
    @(negedge clk);
    start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    exp_label = search(wo, theta, order, hv, ith, exp_n, exp_early);
    checks++;
    if (int'(label) != exp_label || int'(n_cmp) != exp_n || early != exp_early) begin
      failures++;
      $display("FAIL ith=%0b: label %0d/%0d n_cmp %0d/%0d early %0b/%0b",
               ith, label, exp_label, n_cmp, exp_n, early, exp_early);
    end
    if (!ith) begin
      checks++;
      if (lat != V + 5) begin failures++; $display("FAIL full search took %0d cycles", lat); end
    end
    if (ith && early) n_early++;
    if (ith && !early) n_full++;
  endtask

  initial begin
    wo = new[V]; theta = new[V]; order = new[V];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < V; i++) begin
      wo[i] = new[E];
      for (int j = 0; j < E; j++) begin
        wo[i][j] = $urandom_range(0, 200) - 100;
        load(T_WO, i, j, wo[i][j]);
      end
      order[i] = i;
    end
    // random permutation as index order
    for (int i = V - 1; i > 0; i--) begin
      automatic int k = $urandom_range(0, i);
      automatic int tmp = order[i];
      order[i] = order[k]; order[k] = tmp;
    end
    for (int i = 0; i < V; i++) load(T_ORDER, i, 0, order[i]);
    // thresholds: high for most labels, a few reachable ones
    for (int i = 0; i < V; i++) begin
      theta[i] = ($urandom_range(0, 9) == 0) ? 200 : 30000;
      load(T_THETA, i, 0, theta[i]);
    end
    @(negedge clk);
    wload = '0;
    for (int t = 0; t < 20; t++) search_once(0);
    for (int t = 0; t < 40; t++) search_once(1);
    // all thresholds out of reach: thresholding search must scan everything
    for (int i = 0; i < V; i++) begin theta[i] = 32767; load(T_THETA, i, 0, theta[i]); end
    @(negedge clk);
    wload = '0;
    for (int t = 0; t < 5; t++) search_once(1);
    checks++;
    if (n_early == 0 || n_full == 0) begin
      failures++;
      $display("FAIL early exits %0d, full scans %0d", n_early, n_full);
    end
    $display("early exits %0d, full thresholded scans %0d", n_early, n_full);
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
