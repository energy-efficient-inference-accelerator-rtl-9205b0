// tb_mann_control -- self-checking test of the CONTROL module on its own.
// The testbench models FIFO_IN (a word queue), FIFO_OUT (with a full flag
// it toggles), INPUT & WRITE (a busy flag) and the READ/MEM/OUTPUT modules
// (h_valid and done answered after random delays).  It checks:
//   - every load command produces exactly rows x cols weight writes with the
//     right target, row, column and data, in row-major order;
//   - sentence and question words are forwarded with the right path, a
//     sentence ends with one commit, a question with none;
//   - no control word is taken while INPUT & WRITE is busy;
//   - an inference runs HOPS hops, read_start (first only on hop 1) before
//     mem_start, then one OUTPUT start, and the answer word packs label,
//     n_cmp and early; the push waits while FIFO_OUT is full.
module tb_mann_control;
  import mann_pkg::*;
  localparam int E = 4, V = 6, H = 3;
  logic clk = 0, rst_n = 0;
  word_t in_word, out_word;
  logic in_empty, in_pop, out_push, out_full = 0;
  wload_t wload;
  logic new_story, clear_sent, clear_ques, word_valid, word_is_q, commit;
  logic [ROW_W-1:0] word_idx;
  logic iw_busy = 0, read_start, read_first, mem_start, h_valid = 0;
  logic outm_start, ith_en, outm_done = 0, outm_early = 0;
  logic [$clog2(V)-1:0] outm_label = 0;
  logic [$clog2(V+1)-1:0] outm_n_cmp = 0;
  logic busy;

  mann_control #(.EMB(E), .VOCAB(V), .HOPS(H)) dut (.*);

  always #5 clk = ~clk;

  word_t fin[$];
  assign in_empty = (fin.size() == 0);
  assign in_word  = in_empty ? '0 : fin[0];
  always @(posedge clk) if (in_pop) void'(fin.pop_front());

  int checks = 0, failures = 0;
  // expected observations
  wload_t exp_w[$];
  int     exp_words[$];     // {is_q, idx}
  int     n_commit = 0, n_new_story = 0, pop_while_busy = 0;
  int     hops_seen = 0, firsts = 0, mem_starts = 0, outm_starts = 0;
  word_t  pushes[$];
  int     push_while_full = 0;

  always @(posedge clk) if (rst_n) begin
    if (wload.valid) begin
      checks++;
      if (exp_w.size() == 0 || wload != exp_w[0]) begin
        failures++;
        $display("FAIL unexpected weight write %p", wload);
      end
      if (exp_w.size() > 0) void'(exp_w.pop_front());
    end
    if (word_valid) begin
      checks++;
      if (exp_words.size() == 0 || exp_words[0] != {word_is_q, 15'(word_idx)}) begin
        failures++;
        $display("FAIL unexpected word q=%0b idx=%0d", word_is_q, word_idx);
      end
      if (exp_words.size() > 0) void'(exp_words.pop_front());
    end
    if (commit) n_commit++;
    if (new_story) n_new_story++;
    if (in_pop && iw_busy && in_word[31]) pop_while_busy++;
    if (read_start) begin hops_seen++; if (read_first) firsts++; end
    if (mem_start) mem_starts++;
    if (outm_start) outm_starts++;
    if (out_push) begin
      if (out_full) push_while_full++;
      pushes.push_back(out_word);
    end
  end

  // READ/MEM responders: h_valid some cycles after mem_start
  initial forever begin
    @(posedge clk);
    if (mem_start) begin
      repeat ($urandom_range(1, 20)) @(posedge clk);
      #1 h_valid = 1;
      @(posedge clk);
      #1 h_valid = 0;
    end
  end
  // OUTPUT responder
  initial forever begin
    @(posedge clk);
    if (outm_start) begin
      repeat ($urandom_range(1, 10)) @(posedge clk);
      #1 outm_done = 1; outm_label = 3'd5; outm_n_cmp = 3'd4; outm_early = ith_en;
      @(posedge clk);
      #1 outm_done = 0;
    end
  end

  task automatic load(opcode_e op, wtarget_e t, int rows, int cols);
    fin.push_back(ctrl_word(op, 0));
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        automatic int d = $urandom_range(0, 65535);
        fin.push_back(data_word(16'(d)));
        exp_w.push_back('{1'b1, t, ROW_W'(r), COL_W'(c), DATA_W'(d)});
      end
  endtask

  task automatic words(opcode_e op, int n);
    fin.push_back(ctrl_word(op, 16'(n)));
    for (int k = 0; k < n; k++) begin
      automatic int idx = $urandom_range(0, V - 1);
      fin.push_back(data_word(16'(idx)));
      exp_words.push_back({(op == OP_QUESTION), 15'(idx)});
    end
  endtask

  task automatic wait_idle();
    int guard = 0;
    @(negedge clk);
    while ((fin.size() > 0 || busy) && guard < 5000) begin @(negedge clk); guard++; end
  endtask

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, want);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    load(OP_LOAD_EMB_A, T_EMB_A, V, E);
    load(OP_LOAD_EMB_C, T_EMB_C, V, E);
    load(OP_LOAD_EMB_Q, T_EMB_Q, V, E);
    load(OP_LOAD_WR, T_WR, E, E);
    load(OP_LOAD_WO, T_WO, V, E);
    load(OP_LOAD_THETA, T_THETA, V, 1);
    load(OP_LOAD_ORDER, T_ORDER, V, 1);
    wait_idle();
    expect_eq("weight writes left", exp_w.size(), 0);

    fin.push_back(ctrl_word(OP_NEW_STORY, 0));
    words(OP_SENTENCE, 3);
    words(OP_SENTENCE, 5);
    words(OP_QUESTION, 2);
    // INPUT & WRITE busy for a while: no control word may be taken
    fork
      begin
        repeat (4) @(negedge clk);
        iw_busy = 1;
        repeat (30) @(negedge clk);
        iw_busy = 0;
      end
    join_none
    wait_idle();
    repeat (40) @(negedge clk);
    expect_eq("words left", exp_words.size(), 0);
    expect_eq("commits", n_commit, 2);
    expect_eq("new story", n_new_story, 1);
    expect_eq("control words taken while busy", pop_while_busy, 0);

    // inference with thresholding, FIFO_OUT full at first
    out_full = 1;
    fin.push_back(ctrl_word(OP_INFER, 1));
    repeat (400) @(negedge clk);
    expect_eq("hops", hops_seen, H);
    expect_eq("first-hop flags", firsts, 1);
    expect_eq("mem starts", mem_starts, H);
    expect_eq("output starts", outm_starts, 1);
    expect_eq("pushes while full", pushes.size(), 0);
    out_full = 0;
    repeat (5) @(negedge clk);
    expect_eq("answers", pushes.size(), 1);
    if (pushes.size() > 0) expect_eq("answer word", int'(pushes[0]), int'({1'b0, 1'b1, 14'd4, 16'd5}));
    // inference without thresholding
    fin.push_back(ctrl_word(OP_INFER, 0));
    wait_idle();
    repeat (5) @(negedge clk);
    expect_eq("hops", hops_seen, 2 * H);
    expect_eq("answers", pushes.size(), 2);
    if (pushes.size() > 1) expect_eq("answer word", int'(pushes[1]), int'({1'b0, 1'b0, 14'd4, 16'd5}));
    expect_eq("pushes while full", push_while_full, 0);
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
