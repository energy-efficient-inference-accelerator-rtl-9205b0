// input_write -- INPUT & WRITE module: sentence embedding and memory write.
//
// Word indices from the host stream go through a demultiplexer to three
// embedding units: story sentences to the W_emb_a and W_emb_c units (whose
// sums become the address- and content-memory entries of the sentence),
// questions to the W_emb_q unit (whose sum is the first read key).  When a
// sentence is complete the module writes both embeddings into the next
// memory slot of the MEM module.  This follows the paper's description and
// figure.  The slot policy is this design's own: slots fill in order and,
// once all SLOTS are used, the oldest is overwritten, so the memory keeps the
// most recent SLOTS sentences; n_slots counts the valid ones.
//
// Interface:
//   new_story   forget all slots.
//   clear_sent  start a sentence (clears the a and c accumulators).
//   clear_ques  start a question (clears the q accumulator).
//   word_valid, word_idx, word_is_q   one word per cycle; word_is_q selects
//               the question path of the demultiplexer.
//   commit      the current sentence is complete: it is written to memory
//               once its last word has left the embedding pipeline.
//   busy        words or a commit still in flight.
//   mem_wr_*    write port to the MEM module; q_vec the question embedding.
module input_write
  import mann_pkg::*;
#(
  parameter int unsigned EMB   = mann_pkg::DEF_EMB,
  parameter int unsigned VOCAB = mann_pkg::DEF_VOCAB,
  parameter int unsigned SLOTS = mann_pkg::DEF_SLOTS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  wload_t                            wload,
  input  logic                              new_story,
  input  logic                              clear_sent,
  input  logic                              clear_ques,
  input  logic                              word_valid,
  input  logic [ROW_W-1:0]                  word_idx,
  input  logic                              word_is_q,
  input  logic                              commit,
  output logic                              busy,
  output logic                              mem_wr_en,
  output logic [$clog2(SLOTS)-1:0]          mem_wr_slot,
  output logic signed [EMB-1:0][DATA_W-1:0] mem_wr_a,
  output logic signed [EMB-1:0][DATA_W-1:0] mem_wr_c,
  output logic [$clog2(SLOTS+1)-1:0]        n_slots,
  output logic signed [EMB-1:0][DATA_W-1:0] q_vec
);
  localparam int unsigned SW = $clog2(SLOTS);

  logic sent_valid, ques_valid;
  logic busy_a, busy_c, busy_q;
  logic pending;
  logic [SW-1:0] wr_ptr;

  // demultiplexer
  assign sent_valid = word_valid && !word_is_q;
  assign ques_valid = word_valid &&  word_is_q;

  embedding_unit #(.EMB(EMB), .VOCAB(VOCAB), .TARGET(T_EMB_A)) u_emb_a (
    .clk, .rst_n, .wload, .clear(clear_sent), .word_valid(sent_valid),
    .word_idx, .acc(mem_wr_a), .busy(busy_a));
  embedding_unit #(.EMB(EMB), .VOCAB(VOCAB), .TARGET(T_EMB_C)) u_emb_c (
    .clk, .rst_n, .wload, .clear(clear_sent), .word_valid(sent_valid),
    .word_idx, .acc(mem_wr_c), .busy(busy_c));
  embedding_unit #(.EMB(EMB), .VOCAB(VOCAB), .TARGET(T_EMB_Q)) u_emb_q (
    .clk, .rst_n, .wload, .clear(clear_ques), .word_valid(ques_valid),
    .word_idx, .acc(q_vec), .busy(busy_q));

  // write of a finished sentence into the next slot
  assign mem_wr_en   = pending && !busy_a && !busy_c;
  assign mem_wr_slot = wr_ptr;

  always_ff @(posedge clk) begin
    if (!rst_n || new_story) begin
      pending <= 1'b0;
      wr_ptr  <= '0;
      n_slots <= '0;
    end else begin
      if (commit) pending <= 1'b1;
      if (mem_wr_en) begin
        pending <= 1'b0;
        wr_ptr  <= (32'(wr_ptr) == SLOTS-1) ? '0 : wr_ptr + 1'b1;
        if (32'(n_slots) < SLOTS) n_slots <= n_slots + 1'b1;
      end
    end
  end

  assign busy = pending || commit || busy_a || busy_c || busy_q;

  a_no_clear_while_pending: assert property (@(posedge clk) disable iff (!rst_n)
    !(clear_sent && pending)) else $error("input_write: sentence cleared before its write");
endmodule
