// tb_babi_task1 -- a question-answering workload in the style of bAbI task 1
// ("single supporting fact") run end to end on the accelerator at its
// default size.
//
// Stories are generated here: each of four people goes to one of six places
// ("mary went to the kitchen"), in random order, and the question is
// "where is <person>".  The model is not trained but written by hand so that
// it solves the task:
//   W_emb_a, W_emb_q  put 3.0 on the person's own dimension (0..3), so the
//                     sentence about the asked person scores 9 and the
//                     others 0;
//   W_emb_c           puts 4.0 on the place's dimension (4..9);
//   W_r               identity, so h keeps the key and adds the read vector;
//   W_o               1.0 on the place's dimension for each place label;
//   thresholds 6.0 for the place labels, unreachable for all others; index
//                     order: the six place labels first.
// Every answer must be the true place and must agree with the reference
// network.  With thresholding the search must stop within the first six
// labels; without it all 177 labels are computed.  After 25 stories the
// order table is reloaded with the identity order (label i in place i) and
// 10 more stories are run: the thresholded search must then stop exactly at
// the true label's own position, showing what the ordering saves.  The
// testbench prints the mean number of logits computed in all three settings.
module tb_babi_task1;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB, L = DEF_SLOTS, V = DEF_VOCAB, H = DEF_HOPS;
  localparam int PERSON0 = 1, NPERSON = 4, PLACE0 = 10, NPLACE = 6;
  localparam int W_WENT = 20, W_TO = 21, W_THE = 22, W_WHERE = 30, W_IS = 31;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_ready, out_valid, busy;
  logic  out_ready = 1;
  word_t in_data = '0, out_data;

  mann_accel dut (.*);

  always #5 clk = ~clk;

  vec_t wa[], wc[], wq[], wr[], wo[];
  int   theta[], order[];
  vec_t amem[], cmem[];
  int   n_valid = 0;
  word_t tx[$];
  word_t expect_q[$];
  int    truth_q[$];
  bit    ordered_q[$];
  bit    ordered = 1;
  int checks = 0, failures = 0, n_q = 0;
  int sum_cmp_ith = 0, n_ith = 0, sum_cmp_full = 0, n_full = 0;
  int sum_cmp_id = 0, n_id = 0;

  function automatic vec_t zero_vec();
    vec_t v = new[E];
    foreach (v[j]) v[j] = 0;
    return v;
  endfunction

  function automatic void put_table(opcode_e op, vec_t t[]);
    tx.push_back(ctrl_word(op, 0));
    foreach (t[i]) foreach (t[i][j]) tx.push_back(data_word(16'(t[i][j])));
  endfunction

  function automatic void put_list(opcode_e op, int t[]);
    tx.push_back(ctrl_word(op, 0));
    foreach (t[i]) tx.push_back(data_word(16'(t[i])));
  endfunction

  function automatic void put_words(opcode_e op, int idx[]);
    tx.push_back(ctrl_word(op, 16'(idx.size())));
    foreach (idx[k]) tx.push_back(data_word(16'(idx[k])));
  endfunction

  // one story with its question, asked with and without thresholding
  function automatic void story();
    int place[NPERSON];
    int perm[NPERSON];
    int ask;
    vec_t qv;
    tx.push_back(ctrl_word(OP_NEW_STORY, 0));
    n_valid = 0;
    foreach (perm[p]) perm[p] = p;
    for (int p = NPERSON - 1; p > 0; p--) begin
      int k = $urandom_range(0, p);
      int t = perm[p]; perm[p] = perm[k]; perm[k] = t;
    end
    foreach (perm[s]) begin
      int idx[] = '{PERSON0 + perm[s], W_WENT, W_TO, W_THE, 0};
      place[perm[s]] = $urandom_range(0, NPLACE - 1);
      idx[4] = PLACE0 + place[perm[s]];
      put_words(OP_SENTENCE, idx);
      amem[n_valid] = embed(wa, idx, E);
      cmem[n_valid] = embed(wc, idx, E);
      n_valid++;
    end
    ask = $urandom_range(0, NPERSON - 1);
    begin
      int qidx[] = '{W_WHERE, W_IS, PERSON0 + ask};
      put_words(OP_QUESTION, qidx);
      qv = embed(wq, qidx, E);
    end
    for (int ith = 0; ith < 2; ith++) begin
      vec_t k = qv, r, h;
      int label, n_cmp;
      bit early;
      for (int t = 0; t < H; t++) begin
        r = mem_read(amem, cmem, n_valid, k);
        h = controller(wr, k, r);
        k = h;
      end
      label = search(wo, theta, order, h, ith[0], n_cmp, early);
      tx.push_back(ctrl_word(OP_INFER, 16'(ith)));
      expect_q.push_back({1'b0, early, 14'(n_cmp), 16'(label)});
      truth_q.push_back(PLACE0 + place[ask]);
      ordered_q.push_back(ordered);
    end
  endfunction

  // host driver
  logic taken = 0;
  always @(posedge clk) taken <= in_valid && in_ready;
  always @(negedge clk) if (rst_n && (!in_valid || taken)) begin
    if (tx.size() > 0) begin
      in_valid <= 1'b1;
      in_data  <= tx.pop_front();
    end else begin
      in_valid <= 1'b0;
    end
  end

  // answer receiver
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    word_t e;
    int truth;
    bit ord;
    n_q++;
    e = expect_q.pop_front();
    truth = truth_q.pop_front();
    ord = ordered_q.pop_front();
    checks++;
    if (out_data != e) begin
      failures++;
      $display("FAIL answer %0d: got %h expected %h", n_q, out_data, e);
    end
    checks++;
    if (int'(out_data[15:0]) != truth) begin
      failures++;
      $display("FAIL answer %0d: label %0d, true place %0d", n_q, out_data[15:0], truth);
    end
    if (n_q % 2 == 0 && ord) begin
      // thresholded, place labels first: stopped within the six place labels
      checks++;
      if (!out_data[30] || out_data[29:16] > NPLACE) begin
        failures++;
        $display("FAIL answer %0d: thresholded search took %0d logits", n_q, out_data[29:16]);
      end
      sum_cmp_ith += int'(out_data[29:16]); n_ith++;
    end else if (n_q % 2 == 0) begin
      // thresholded, identity order: stopped at the true label's position
      checks++;
      if (!out_data[30] || int'(out_data[29:16]) != truth + 1) begin
        failures++;
        $display("FAIL answer %0d: identity-order search took %0d logits, expected %0d",
                 n_q, out_data[29:16], truth + 1);
      end
      sum_cmp_id += int'(out_data[29:16]); n_id++;
    end else begin
      checks++;
      if (int'(out_data[29:16]) != V) begin
        failures++;
        $display("FAIL answer %0d: full search took %0d logits", n_q, out_data[29:16]);
      end
      sum_cmp_full += int'(out_data[29:16]); n_full++;
    end
  end

  initial begin
    wa = new[V]; wc = new[V]; wq = new[V]; wo = new[V]; wr = new[E];
    theta = new[V]; order = new[V]; amem = new[L]; cmem = new[L];
    foreach (wa[i]) begin
      wa[i] = zero_vec(); wc[i] = zero_vec(); wq[i] = zero_vec(); wo[i] = zero_vec();
      theta[i] = 32767;
    end
    for (int p = 0; p < NPERSON; p++) begin
      wa[PERSON0 + p][p] = 3 * 256;
      wq[PERSON0 + p][p] = 3 * 256;
    end
    for (int l = 0; l < NPLACE; l++) begin
      wc[PLACE0 + l][NPERSON + l] = 4 * 256;
      wo[PLACE0 + l][NPERSON + l] = 256;
      theta[PLACE0 + l] = 6 * 256;
    end
    foreach (wr[i]) begin wr[i] = zero_vec(); wr[i][i] = 256; end
    // index order: place labels first, then the rest
    for (int i = 0; i < NPLACE; i++) order[i] = PLACE0 + i;
    begin
      int p = NPLACE;
      for (int i = 0; i < V; i++) if (i < PLACE0 || i >= PLACE0 + NPLACE) begin order[p] = i; p++; end
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    put_table(OP_LOAD_EMB_A, wa);
    put_table(OP_LOAD_EMB_C, wc);
    put_table(OP_LOAD_EMB_Q, wq);
    put_table(OP_LOAD_WR, wr);
    put_table(OP_LOAD_WO, wo);
    put_list(OP_LOAD_THETA, theta);
    put_list(OP_LOAD_ORDER, order);
    for (int s = 0; s < 25; s++) story();
    // same model, identity index order
    ordered = 0;
    foreach (order[i]) order[i] = i;
    put_list(OP_LOAD_ORDER, order);
    for (int s = 0; s < 10; s++) story();
    while (tx.size() > 0 || in_valid || busy || out_valid || expect_q.size() > 0) @(negedge clk);
    checks++;
    if (n_q != 70) begin failures++; $display("FAIL %0d answers, expected 70", n_q); end
    checks++;
    if (sum_cmp_ith * n_id >= sum_cmp_id * n_ith) begin
      failures++;
      $display("FAIL ordering saved nothing");
    end
    $display("mean logits computed: %0.2f thresholded with place labels first (%0d questions),",
             real'(sum_cmp_ith) / real'(n_ith), n_ith);
    $display("  %0.2f thresholded in identity order (%0d), %0.2f without thresholding (%0d)",
             real'(sum_cmp_id) / real'(n_id), n_id, real'(sum_cmp_full) / real'(n_full), n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
