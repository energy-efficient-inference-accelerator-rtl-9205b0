// embedding_unit -- bag-of-words sentence embedding (one "embedding module").
//
// Eq. 2 of the method: the embedded sentence is the sum of the columns of the
// embedding matrix W_emb selected by the sentence's word indices, so no
// multiplication is needed and only the columns of words that occur are read.
// The unit holds W_emb (one row of EMB elements per vocabulary word), an
// E-wide adder and the accumulation register ("accu reg"), as drawn for each
// of W_emb_c, W_emb_a and W_emb_q.
//
// Interface:
//   wload      element writes of the trained model; the unit takes those whose
//              target equals TARGET (row = word index, col = element).
//   clear      zeroes the accumulator (start of a sentence).
//   word_valid/word_idx  one word index per cycle, any number of cycles.
//   acc        the running sum, Q8.8, saturating per element.
//   busy       high while a word is still in the read pipeline.
// Timing: the table read is registered (block RAM), so a word reaches acc
// two clock edges after it is presented; busy covers that gap.
// Word indices at or above VOCAB are ignored.
module embedding_unit
  import mann_pkg::*;
#(
  parameter int unsigned EMB   = mann_pkg::DEF_EMB,
  parameter int unsigned VOCAB = mann_pkg::DEF_VOCAB,
  parameter wtarget_e    TARGET = T_EMB_A
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  wload_t                         wload,
  input  logic                           clear,
  input  logic                           word_valid,
  input  logic [ROW_W-1:0]               word_idx,
  output logic signed [EMB-1:0][DATA_W-1:0] acc,
  output logic                           busy
);
  logic signed [EMB-1:0][DATA_W-1:0] wemb [VOCAB];
  logic signed [EMB-1:0][DATA_W-1:0] col_q;
  logic                              col_v;

  // model load, one element per write
  always_ff @(posedge clk) begin
    if (wload.valid && wload.target == TARGET &&
        32'(wload.row) < VOCAB && 32'(wload.col) < EMB)
      wemb[wload.row][wload.col] <= wload.data;
  end

  // column read
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_v <= 1'b0;
      col_q <= '0;
    end else begin
      col_v <= word_valid && (32'(word_idx) < VOCAB);
      if (word_valid && (32'(word_idx) < VOCAB)) col_q <= wemb[word_idx];
    end
  end

  // adder and accu reg
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      acc <= '0;
    end else if (col_v) begin
      for (int e = 0; e < EMB; e++)
        acc[e] <= sat_w(ACC_W'(signed'(acc[e])) + ACC_W'(signed'(col_q[e])));
    end
  end

  assign busy = col_v || (word_valid && (32'(word_idx) < VOCAB));
endmodule
