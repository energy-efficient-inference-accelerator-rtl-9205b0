// mann_accel -- dataflow inference accelerator for an end-to-end memory
// network (top level).
//
// The blocks are wired as in the paper's architecture figure:
//   host stream -> FIFO_IN -> CONTROL (FIFO control + inference control)
//   CONTROL -> INPUT & WRITE (embeddings) -> MEM (address/content memory)
//   READ (key mux, W_r k, h = r + W_r k) <-> MEM (attention, read vector)
//   READ h -> OUTPUT (logits, argmax, inference thresholding) -> CONTROL
//   CONTROL -> FIFO_OUT -> host
// The trained model (W_emb_a, W_emb_c, W_emb_q, W_r, W_o, thresholds, index
// order) arrives over the same stream and is distributed on the weight-load
// bus.  Data move directly between the modules; no module goes through a
// shared memory.
//
// The host computer and its PCIe link are outside this design: the write
// side of FIFO_IN (in_valid/in_data/in_ready) and the read side of FIFO_OUT
// (out_valid/out_data/out_ready) are the top's ports, both valid/ready
// handshakes where a word moves in a cycle with valid and ready high.
// busy is high while the accelerator works on a command.
module mann_accel
  import mann_pkg::*;
#(
  parameter int unsigned EMB     = mann_pkg::DEF_EMB,
  parameter int unsigned SLOTS   = mann_pkg::DEF_SLOTS,
  parameter int unsigned VOCAB   = mann_pkg::DEF_VOCAB,
  parameter int unsigned HOPS    = mann_pkg::DEF_HOPS,
  parameter int unsigned FIFO_IN_DEPTH  = 512,
  parameter int unsigned FIFO_OUT_DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t in_data,
  output logic  in_ready,
  output logic  out_valid,
  output word_t out_data,
  input  logic  out_ready,
  output logic  busy
);
  // FIFO_IN / FIFO_OUT
  word_t fin_dout, fout_din;
  logic  fin_full, fin_empty, fin_pop;
  logic  fout_full, fout_empty, fout_push;
  logic [$clog2(FIFO_IN_DEPTH+1)-1:0]  fin_count;
  logic [$clog2(FIFO_OUT_DEPTH+1)-1:0] fout_count;

  // CONTROL outputs
  wload_t wload;
  logic new_story, clear_sent, clear_ques, word_valid, word_is_q, commit;
  logic [ROW_W-1:0] word_idx;
  logic read_start, read_first, mem_start, outm_start, ith_en;

  // INPUT & WRITE
  logic iw_busy, mem_wr_en;
  logic [$clog2(SLOTS)-1:0] mem_wr_slot;
  logic [$clog2(SLOTS+1)-1:0] n_slots;
  logic signed [EMB-1:0][DATA_W-1:0] mem_wr_a, mem_wr_c, q_vec;

  // MEM / READ / OUTPUT
  logic signed [EMB-1:0][DATA_W-1:0] key, r_vec, h_vec;
  logic mem_busy, mem_done, h_valid, read_busy;
  logic outm_done, outm_early, outm_busy;
  logic [$clog2(VOCAB)-1:0]   outm_label;
  logic [$clog2(VOCAB+1)-1:0] outm_n_cmp;
  logic ctrl_busy;

  assign in_ready  = !fin_full;
  assign out_valid = !fout_empty;
  assign busy      = ctrl_busy || mem_busy || read_busy || outm_busy;

  stream_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_IN_DEPTH)) u_fifo_in (
    .clk, .rst_n, .push(in_valid && in_ready), .din(in_data), .full(fin_full),
    .pop(fin_pop), .dout(fin_dout), .empty(fin_empty), .count(fin_count));

  stream_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_OUT_DEPTH)) u_fifo_out (
    .clk, .rst_n, .push(fout_push), .din(fout_din), .full(fout_full),
    .pop(out_ready && out_valid), .dout(out_data), .empty(fout_empty), .count(fout_count));

  mann_control #(.EMB(EMB), .VOCAB(VOCAB), .HOPS(HOPS)) u_control (
    .clk, .rst_n,
    .in_word(fin_dout), .in_empty(fin_empty), .in_pop(fin_pop),
    .out_word(fout_din), .out_push(fout_push), .out_full(fout_full),
    .wload,
    .new_story, .clear_sent, .clear_ques, .word_valid, .word_idx, .word_is_q,
    .commit, .iw_busy,
    .read_start, .read_first, .mem_start, .h_valid,
    .outm_start, .ith_en, .outm_done, .outm_label, .outm_n_cmp, .outm_early,
    .busy(ctrl_busy));

  input_write #(.EMB(EMB), .VOCAB(VOCAB), .SLOTS(SLOTS)) u_input_write (
    .clk, .rst_n, .wload, .new_story, .clear_sent, .clear_ques,
    .word_valid, .word_idx, .word_is_q, .commit, .busy(iw_busy),
    .mem_wr_en, .mem_wr_slot, .mem_wr_a, .mem_wr_c, .n_slots, .q_vec);

  mem_module #(.EMB(EMB), .SLOTS(SLOTS)) u_mem (
    .clk, .rst_n, .wr_en(mem_wr_en), .wr_slot(mem_wr_slot),
    .wr_a(mem_wr_a), .wr_c(mem_wr_c), .n_slots,
    .start(mem_start), .key, .busy(mem_busy), .done(mem_done), .r(r_vec));

  read_module #(.EMB(EMB)) u_read (
    .clk, .rst_n, .wload, .start(read_start), .first(read_first), .q_vec,
    .r_valid(mem_done), .r_vec, .key, .h(h_vec), .h_valid, .busy(read_busy));

  output_module #(.EMB(EMB), .VOCAB(VOCAB)) u_output (
    .clk, .rst_n, .wload, .start(outm_start), .ith_en, .h(h_vec),
    .done(outm_done), .label(outm_label), .n_cmp(outm_n_cmp),
    .early(outm_early), .busy(outm_busy));
endmodule
