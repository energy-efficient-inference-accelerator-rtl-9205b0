// tb_mann_accel -- end-to-end test of the accelerator at its default size
// (embedding 20, 50 memory slots, 177 labels, 3 hops).
//
// The testbench plays the host: it generates a random trained model, streams
// it into FIFO_IN with the load commands, then streams stories, questions
// and inference commands, and compares every answer word read from
// FIFO_OUT (label, number of logits computed, early-exit flag) with a
// reference model of the whole network run on the same data.
// Mechanisms that must occur, each counted:
//   - recurrent hops (key taken from h instead of the question),
//   - inference thresholding stopping early, and a thresholded search
//     that finds no logit above its threshold and scans everything,
//   - the conventional full search (thresholding off),
//   - the memory slot ring wrapping (a story longer than 50 sentences),
//   - back-pressure from a full FIFO_IN,
//   - FIFO_OUT full, stalling the push of an answer.
module tb_mann_accel;
  import mann_pkg::*;
  import mann_ref_pkg::*;
  localparam int E = DEF_EMB, L = DEF_SLOTS, V = DEF_VOCAB, H = DEF_HOPS;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  word_t in_data = '0, out_data;

  mann_accel dut (.*);

  always #5 clk = ~clk;

  // ---------------- reference state ----------------
  vec_t wa[], wc[], wq[], wr[], wo[];
  int   theta[], order[];
  vec_t amem[], cmem[];
  int   n_valid = 0, wr_ptr = 0;
  vec_t qv;

  word_t tx[$];        // words to send
  word_t expect_q[$];  // expected answer words
  int checks = 0, failures = 0;
  int n_hops_rec = 0, n_early = 0, n_ith_full = 0, n_conv = 0, n_wrap = 0;
  int n_in_bp = 0, n_out_stall = 0, n_answers = 0;
  bit hold_out = 0;
  word_t exp_word;

  function automatic vec_t rand_vec(int lo, int hi);
    vec_t v = new[E];
    foreach (v[j]) v[j] = $urandom_range(0, hi - lo) + lo;
    return v;
  endfunction

  function automatic void put_ctrl(opcode_e op, int arg);
    tx.push_back(ctrl_word(op, 16'(arg)));
  endfunction

  function automatic void put_table(opcode_e op, vec_t t[]);
    put_ctrl(op, 0);
    foreach (t[i]) foreach (t[i][j]) tx.push_back(data_word(16'(t[i][j])));
  endfunction

  function automatic void put_list(opcode_e op, int t[]);
    put_ctrl(op, 0);
    foreach (t[i]) tx.push_back(data_word(16'(t[i])));
  endfunction

  function automatic void new_story();
    put_ctrl(OP_NEW_STORY, 0);
    n_valid = 0; wr_ptr = 0;
  endfunction

  function automatic void sentence();
    int n = $urandom_range(3, 8);
    int idx[] = new[n];
    foreach (idx[k]) idx[k] = $urandom_range(0, V - 1);
    put_ctrl(OP_SENTENCE, n);
    foreach (idx[k]) tx.push_back(data_word(16'(idx[k])));
    amem[wr_ptr] = embed(wa, idx, E);
    cmem[wr_ptr] = embed(wc, idx, E);
    if (wr_ptr == L - 1) n_wrap++;
    wr_ptr = (wr_ptr + 1) % L;
    if (n_valid < L) n_valid++;
  endfunction

  function automatic void question();
    int n = $urandom_range(2, 6);
    int idx[] = new[n];
    foreach (idx[k]) idx[k] = $urandom_range(0, V - 1);
    put_ctrl(OP_QUESTION, n);
    foreach (idx[k]) tx.push_back(data_word(16'(idx[k])));
    qv = embed(wq, idx, E);
  endfunction

  function automatic void infer(bit ith);
    vec_t k = qv, r, h;
    int label, n_cmp;
    bit early;
    for (int t = 0; t < H; t++) begin
      r = mem_read(amem, cmem, n_valid, k);
      h = controller(wr, k, r);
      if (t > 0) n_hops_rec++;
      k = h;
    end
    label = search(wo, theta, order, h, ith, n_cmp, early);
    if (ith && early) n_early++;
    else if (ith) n_ith_full++;
    else n_conv++;
    put_ctrl(OP_INFER, int'(ith));
    expect_q.push_back({1'b0, early, 14'(n_cmp), 16'(label)});
  endfunction

  // ---------------- host driver ----------------
  // A word moves on the rising edge where in_valid and in_ready are high;
  // the next word (or a random idle cycle) is presented on the falling edge.
  logic taken = 0;
  always @(posedge clk) taken <= in_valid && in_ready;
  always @(negedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) n_in_bp++;
      if (!in_valid || taken) begin
        if (tx.size() > 0 && ($urandom_range(0, 15) != 0)) begin
          in_valid <= 1'b1;
          in_data  <= tx.pop_front();
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end

  // ---------------- answer receiver ----------------
  // After a hold, out_ready stays high; a run of FIFO_OUT_DEPTH answers in
  // consecutive cycles proves FIFO_OUT was full (answers are produced far
  // more slowly than one per cycle).
  bit drain_fast = 0;
  int run = 0, max_run = 0;
  always @(negedge clk) out_ready <= !hold_out && (drain_fast || ($urandom_range(0, 3) != 0));
  always @(posedge clk) begin
    if (rst_n && drain_fast) begin
      run = (out_valid && out_ready) ? run + 1 : 0;
      if (run > max_run) max_run = run;
    end
    if (rst_n && out_valid && out_ready) begin
      n_answers++;
      checks++;
      if (expect_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected answer %h", out_data);
      end else begin
        exp_word = expect_q.pop_front();
        if (out_data != exp_word) begin
          failures++;
          $display("FAIL answer %0d: got label %0d n_cmp %0d early %0b, expected label %0d n_cmp %0d early %0b",
                   n_answers, out_data[15:0], out_data[29:16], out_data[30], exp_word[15:0], exp_word[29:16], exp_word[30]);
        end
      end
    end
  end

  task automatic wait_drained();
    while (tx.size() > 0 || in_valid || busy || out_valid || expect_q.size() > 0) @(negedge clk);
  endtask

  initial begin
    wa = new[V]; wc = new[V]; wq = new[V]; wo = new[V]; wr = new[E];
    theta = new[V]; order = new[V]; amem = new[L]; cmem = new[L];
    foreach (amem[i]) begin amem[i] = new[E]; cmem[i] = new[E]; end
    for (int i = 0; i < V; i++) begin
      wa[i] = rand_vec(-64, 64);
      wc[i] = rand_vec(-128, 128);
      wq[i] = rand_vec(-64, 64);
      wo[i] = rand_vec(-64, 64);
      order[i] = i;
      theta[i] = 32767;
    end
    for (int i = 0; i < E; i++) wr[i] = rand_vec(-26, 26);
    for (int i = V - 1; i > 0; i--) begin
      automatic int k = $urandom_range(0, i);
      automatic int tmp = order[i];
      order[i] = order[k]; order[k] = tmp;
    end
    // a quarter of the labels get a reachable threshold
    for (int i = 0; i < V; i++) if ($urandom_range(0, 3) == 0) theta[i] = 0;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // trained model
    put_table(OP_LOAD_EMB_A, wa);
    put_table(OP_LOAD_EMB_C, wc);
    put_table(OP_LOAD_EMB_Q, wq);
    put_table(OP_LOAD_WR, wr);
    put_table(OP_LOAD_WO, wo);
    put_list(OP_LOAD_THETA, theta);
    put_list(OP_LOAD_ORDER, order);

    // story 1: a few sentences, questions with and without thresholding
    new_story();
    for (int s = 0; s < 10; s++) sentence();
    for (int qn = 0; qn < 4; qn++) begin
      question();
      infer(1'b0);
      infer(1'b1);
    end
    // story 2: longer than the memory, wraps the slot ring
    new_story();
    for (int s = 0; s < L + 12; s++) begin
      sentence();
      if (s % 20 == 19) begin question(); infer(1'b1); end
    end
    question(); infer(1'b0); infer(1'b1);
    // a model update queued behind the inferences fills FIFO_IN
    put_table(OP_LOAD_WO, wo);
    wait_drained();

    // thresholds out of reach: thresholded search scans all labels
    foreach (theta[i]) theta[i] = 32767;
    put_list(OP_LOAD_THETA, theta);
    question(); infer(1'b1);
    wait_drained();

    // FIFO_OUT held: answers pile up until FIFO_OUT is full
    new_story();
    sentence();
    hold_out = 1;
    question();
    for (int n = 0; n < 20; n++) infer(n % 2 == 1);
    while (tx.size() > 0 || in_valid) @(negedge clk);
    repeat (8000) @(negedge clk);
    drain_fast = 1;
    hold_out = 0;
    wait_drained();
    drain_fast = 0;
    if (max_run >= 16) n_out_stall = 1;
    repeat (20) @(negedge clk);

    // every mechanism must have occurred
    checks++; if (n_hops_rec == 0)  begin failures++; $display("FAIL no recurrent hop"); end
    checks++; if (n_early == 0)     begin failures++; $display("FAIL no early exit"); end
    checks++; if (n_ith_full == 0)  begin failures++; $display("FAIL no full thresholded search"); end
    checks++; if (n_conv == 0)      begin failures++; $display("FAIL no conventional search"); end
    checks++; if (n_wrap == 0)      begin failures++; $display("FAIL memory never wrapped"); end
    checks++; if (n_in_bp == 0)     begin failures++; $display("FAIL FIFO_IN never pushed back"); end
    checks++; if (n_out_stall == 0) begin failures++; $display("FAIL FIFO_OUT never full"); end
    checks++; if (expect_q.size() != 0) begin failures++; $display("FAIL %0d answers missing", expect_q.size()); end
    $display("answers %0d: early exits %0d, full thresholded %0d, conventional %0d; recurrent hops %0d",
             n_answers, n_early, n_ith_full, n_conv, n_hops_rec);
    $display("memory wraps %0d, FIFO_IN back-pressure cycles %0d, longest run of queued answers %0d",
             n_wrap, n_in_bp, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
