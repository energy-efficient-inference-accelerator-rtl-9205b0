// tb_input_write -- self-checking test of the INPUT & WRITE module.
// Three random embedding tables are loaded.  Stories of random sentences are
// fed word by word; each committed sentence must be written once, into the
// next slot (wrapping after SLOTS, which the test provokes), with the
// reference sums of W_emb_a and W_emb_c.  Questions must leave the memory
// alone and produce the W_emb_q sum.  n_slots must count up to SLOTS and
// new_story must reset it.
module tb_input_write;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB, V = DEF_VOCAB, L = 8;
  logic clk = 0, rst_n = 0;
  wload_t wload = '0;
  logic new_story = 0, clear_sent = 0, clear_ques = 0, word_valid = 0, word_is_q = 0, commit = 0;
  logic [ROW_W-1:0] word_idx = 0;
  logic busy, mem_wr_en;
  logic [$clog2(L)-1:0] mem_wr_slot;
  logic signed [E-1:0][DATA_W-1:0] mem_wr_a, mem_wr_c, q_vec;
  logic [$clog2(L+1)-1:0] n_slots;
  vec_t wa[], wc[], wq[];
  int checks = 0, failures = 0, writes = 0, wraps = 0, exp_slot = 0;
  vec_t exp_a, exp_c;

  input_write #(.EMB(E), .VOCAB(V), .SLOTS(L)) dut (.*);

  always #5 clk = ~clk;

  // every memory write is checked against the expected sentence
  always @(posedge clk) if (rst_n && mem_wr_en) begin
    writes++;
    checks++;
    if (int'(mem_wr_slot) != exp_slot) begin
      failures++;
      $display("FAIL write to slot %0d, expected %0d", mem_wr_slot, exp_slot);
    end
    for (int j = 0; j < E; j++) begin
      checks++;
      if (int'(signed'(mem_wr_a[j])) != exp_a[j] || int'(signed'(mem_wr_c[j])) != exp_c[j]) begin
        failures++;
        $display("FAIL slot data elem %0d", j);
      end
    end
    if (exp_slot == L - 1) wraps++;
    exp_slot = (exp_slot + 1) % L;
  end

  task automatic send(int idx[], bit is_q);
    @(negedge clk);
    if (is_q) clear_ques = 1; else clear_sent = 1;
    @(negedge clk);
    clear_ques = 0; clear_sent = 0;
    foreach (idx[k]) begin
      word_valid = 1; word_is_q = is_q; word_idx = ROW_W'(idx[k]);
      @(negedge clk);
    end
    word_valid = 0;
    if (!is_q) begin
      exp_a = embed(wa, idx, E);
      exp_c = embed(wc, idx, E);
      commit = 1;
      @(negedge clk);
      commit = 0;
    end
    while (busy) @(negedge clk);
  endtask

  initial begin
    wa = new[V]; wc = new[V]; wq = new[V];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < V; i++) begin
      wa[i] = new[E]; wc[i] = new[E]; wq[i] = new[E];
      for (int j = 0; j < E; j++) begin
        wa[i][j] = $urandom_range(0, 400) - 200;
        wc[i][j] = $urandom_range(0, 400) - 200;
        wq[i][j] = $urandom_range(0, 400) - 200;
        @(negedge clk); wload = '{1'b1, T_EMB_A, ROW_W'(i), COL_W'(j), DATA_W'(wa[i][j])};
        @(negedge clk); wload = '{1'b1, T_EMB_C, ROW_W'(i), COL_W'(j), DATA_W'(wc[i][j])};
        @(negedge clk); wload = '{1'b1, T_EMB_Q, ROW_W'(i), COL_W'(j), DATA_W'(wq[i][j])};
      end
    end
    @(negedge clk);
    wload = '0;
    for (int story = 0; story < 3; story++) begin
      automatic int ns = (story == 1) ? L + 5 : $urandom_range(1, L - 1);
      @(negedge clk); new_story = 1; @(negedge clk); new_story = 0;
      exp_slot = 0;
      for (int s = 0; s < ns; s++) begin
        automatic int n = $urandom_range(1, 10);
        automatic int idx[] = new[n];
        foreach (idx[k]) idx[k] = $urandom_range(0, V - 1);
        send(idx, 0);
        checks++;
        if (int'(n_slots) != ((s + 1 < L) ? s + 1 : L)) begin
          failures++;
          $display("FAIL n_slots %0d after %0d sentences", n_slots, s + 1);
        end
      end
      begin
        automatic int n = $urandom_range(1, 8);
        automatic int idx[] = new[n];
        automatic int nwr_before = writes;
        automatic vec_t eq;
        foreach (idx[k]) idx[k] = $urandom_range(0, V - 1);
        send(idx, 1);
        eq = embed(wq, idx, E);
        for (int j = 0; j < E; j++) begin
          checks++;
          if (int'(signed'(q_vec[j])) != eq[j]) begin
            failures++;
            $display("FAIL question elem %0d", j);
          end
        end
        checks++;
        if (writes != nwr_before) begin failures++; $display("FAIL question wrote memory"); end
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL slot ring never wrapped"); end
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
