// tb_embedding_unit -- self-checking test of one bag-of-words embedding unit.
// A random W_emb is loaded through the weight-load bus (plus writes for
// other targets, which must be ignored); random sentences, with repeated and
// out-of-range words, are summed and compared with the reference sum; the
// sum must appear two cycles after the last word.
module tb_embedding_unit;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB, V = DEF_VOCAB;
  logic clk = 0, rst_n = 0, clear = 0, word_valid = 0, busy;
  wload_t wload = '0;
  logic [ROW_W-1:0] word_idx = 0;
  logic signed [E-1:0][DATA_W-1:0] acc;
  vec_t w[];
  int checks = 0, failures = 0;

  embedding_unit #(.EMB(E), .VOCAB(V), .TARGET(T_EMB_C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    w = new[V];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < V; i++) begin
      w[i] = new[E];
      for (int j = 0; j < E; j++) begin
        w[i][j] = int'($urandom_range(0, 2047)) - 1024;
        @(negedge clk);
        wload = '{valid: 1'b1, target: T_EMB_C, row: ROW_W'(i), col: COL_W'(j), data: DATA_W'(w[i][j])};
        @(negedge clk);
        // a write for another table at the same place must not land here
        wload = '{valid: 1'b1, target: T_EMB_A, row: ROW_W'(i), col: COL_W'(j), data: 16'h1234};
      end
    end
    @(negedge clk);
    wload = '0;
    for (int s = 0; s < 60; s++) begin
      automatic int n = $urandom_range(1, 12);
      automatic int idx[] = new[n];
      automatic vec_t expv;
      foreach (idx[k]) idx[k] = (s == 5 && k == 0) ? V + 3 : $urandom_range(0, V-1);
      if (s == 7) idx[n-1] = idx[0];
      clear = 1;
      @(negedge clk);
      clear = 0;
      foreach (idx[k]) begin
        word_valid = 1; word_idx = ROW_W'(idx[k]);
        @(negedge clk);
      end
      word_valid = 0;
      @(negedge clk);
      expv = embed(w, idx, E);
      // one cycle after the last word the sum is complete
      for (int j = 0; j < E; j++) begin
        checks++;
        if (int'(signed'(acc[j])) != expv[j]) begin
          failures++;
          $display("FAIL sentence %0d elem %0d: got %0d expected %0d", s, j, signed'(acc[j]), expv[j]);
        end
      end
      checks++;
      if (busy) begin failures++; $display("FAIL busy after sentence"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
