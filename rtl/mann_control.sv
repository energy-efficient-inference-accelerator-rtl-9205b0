// mann_control -- CONTROL module: FIFO control and inference control.
//
// The host sends one stream of 32-bit words in which control words (bit 31
// set) are embedded among data words.  The FIFO-control part pops FIFO_IN,
// decodes each control word and routes the data words that follow it:
//   OP_LOAD_*     table elements onto the weight-load bus (wload), row by row;
//   OP_NEW_STORY  clears the memory;
//   OP_SENTENCE n the next n words are word indices of one story sentence,
//                 embedded and written into memory by INPUT & WRITE;
//   OP_QUESTION n the next n words are the question's word indices;
//   OP_INFER      arg[0] enables inference thresholding.
// The inference-control part then runs the hops: per hop it starts the READ
// module (which latches the key) and, a cycle later, the MEM module; the
// READ module signals h_valid when h = r + W_r k is ready.  After HOPS hops
// it starts the OUTPUT module and pushes the answer word
//   {1'b0, early, n_cmp[13:0], label[15:0]}
// into FIFO_OUT, waiting while FIFO_OUT is full.
// The paper says only that control signals are embedded in the data and
// that the CONTROL module signals the other modules; the opcodes, the word
// format and the sequencing are this design's own choice.
//
// Timing: one stream word per cycle in load, sentence and question phases.
// A new control word is taken only when INPUT & WRITE is idle.
module mann_control
  import mann_pkg::*;
#(
  parameter int unsigned EMB   = mann_pkg::DEF_EMB,
  parameter int unsigned VOCAB = mann_pkg::DEF_VOCAB,
  parameter int unsigned HOPS  = mann_pkg::DEF_HOPS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // FIFO_IN read side
  input  word_t                         in_word,
  input  logic                          in_empty,
  output logic                          in_pop,
  // FIFO_OUT write side
  output word_t                         out_word,
  output logic                          out_push,
  input  logic                          out_full,
  // trained-model load bus
  output wload_t                        wload,
  // INPUT & WRITE
  output logic                          new_story,
  output logic                          clear_sent,
  output logic                          clear_ques,
  output logic                          word_valid,
  output logic [ROW_W-1:0]              word_idx,
  output logic                          word_is_q,
  output logic                          commit,
  input  logic                          iw_busy,
  // READ and MEM
  output logic                          read_start,
  output logic                          read_first,
  output logic                          mem_start,
  input  logic                          h_valid,
  // OUTPUT
  output logic                          outm_start,
  output logic                          ith_en,
  input  logic                          outm_done,
  input  logic [$clog2(VOCAB)-1:0]      outm_label,
  input  logic [$clog2(VOCAB+1)-1:0]    outm_n_cmp,
  input  logic                          outm_early,
  output logic                          busy
);
  typedef enum logic [3:0] {
    S_FETCH, S_LOAD, S_WORDS, S_HOP_READ, S_HOP_MEM, S_HOP_WAIT,
    S_OUT_START, S_OUT_WAIT, S_PUSH
  } state_e;
  state_e state;

  opcode_e          op;
  wtarget_e         tgt;
  logic [ROW_W-1:0] rows, row;
  logic [COL_W-1:0] cols, col;
  logic [15:0]      cnt;
  logic [7:0]       hop;
  word_t            result;

  assign op = opcode_e'(in_word[30:24]);

  // Combinational outputs derived from the state and the FIFO head
  always_comb begin
    in_pop     = 1'b0;
    wload      = '0;
    word_valid = 1'b0;
    word_idx   = in_word[ROW_W-1:0];
    unique case (state)
      S_FETCH: in_pop = !in_empty && !iw_busy;
      S_LOAD: begin
        in_pop = !in_empty;
        wload.valid  = !in_empty;
        wload.target = tgt;
        wload.row    = row;
        wload.col    = col;
        wload.data   = in_word[DATA_W-1:0];
      end
      S_WORDS: begin
        in_pop     = !in_empty && (cnt != 0);
        word_valid = in_pop;
      end
      default: ;
    endcase
  end

  assign out_word = result;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_FETCH;
      tgt        <= T_NONE;
      rows       <= '0;
      cols       <= '0;
      row        <= '0;
      col        <= '0;
      cnt        <= '0;
      hop        <= '0;
      result     <= '0;
      ith_en     <= 1'b0;
      word_is_q  <= 1'b0;
      new_story  <= 1'b0;
      clear_sent <= 1'b0;
      clear_ques <= 1'b0;
      commit     <= 1'b0;
      read_start <= 1'b0;
      read_first <= 1'b0;
      mem_start  <= 1'b0;
      outm_start <= 1'b0;
      out_push   <= 1'b0;
    end else begin
      new_story  <= 1'b0;
      clear_sent <= 1'b0;
      clear_ques <= 1'b0;
      commit     <= 1'b0;
      read_start <= 1'b0;
      mem_start  <= 1'b0;
      outm_start <= 1'b0;
      out_push   <= 1'b0;
      unique case (state)
        S_FETCH: if (in_pop && in_word[31]) begin
          row <= '0;
          col <= '0;
          unique case (op)
            OP_LOAD_EMB_A, OP_LOAD_EMB_C, OP_LOAD_EMB_Q, OP_LOAD_WO: begin
              tgt   <= (op == OP_LOAD_EMB_A) ? T_EMB_A :
                       (op == OP_LOAD_EMB_C) ? T_EMB_C :
                       (op == OP_LOAD_EMB_Q) ? T_EMB_Q : T_WO;
              rows  <= ROW_W'(VOCAB);
              cols  <= COL_W'(EMB);
              state <= S_LOAD;
            end
            OP_LOAD_WR: begin
              tgt <= T_WR; rows <= ROW_W'(EMB); cols <= COL_W'(EMB); state <= S_LOAD;
            end
            OP_LOAD_THETA, OP_LOAD_ORDER: begin
              tgt   <= (op == OP_LOAD_THETA) ? T_THETA : T_ORDER;
              rows  <= ROW_W'(VOCAB);
              cols  <= COL_W'(1);
              state <= S_LOAD;
            end
            OP_NEW_STORY: new_story <= 1'b1;
            OP_SENTENCE, OP_QUESTION: begin
              word_is_q  <= (op == OP_QUESTION);
              clear_sent <= (op == OP_SENTENCE);
              clear_ques <= (op == OP_QUESTION);
              cnt        <= in_word[15:0];
              state      <= S_WORDS;
            end
            OP_INFER: begin
              ith_en <= in_word[0];
              hop    <= '0;
              state  <= S_HOP_READ;
            end
            default: ;   // OP_NOP and unknown opcodes are skipped
          endcase
        end

        S_LOAD: if (in_pop) begin
          if (col == cols - 1'b1) begin
            col <= '0;
            row <= row + 1'b1;
            if (row == rows - 1'b1) state <= S_FETCH;
          end else begin
            col <= col + 1'b1;
          end
        end

        S_WORDS: begin
          if (cnt == 0) begin
            commit <= !word_is_q;
            state  <= S_FETCH;
          end else if (in_pop) begin
            cnt <= cnt - 1'b1;
          end
        end

        S_HOP_READ: begin
          read_start <= 1'b1;
          read_first <= (hop == 0);
          state      <= S_HOP_MEM;
        end

        S_HOP_MEM: begin
          mem_start <= 1'b1;
          state     <= S_HOP_WAIT;
        end

        S_HOP_WAIT: if (h_valid) begin
          hop <= hop + 1'b1;
          state <= (32'(hop) == HOPS-1) ? S_OUT_START : S_HOP_READ;
        end

        S_OUT_START: begin
          outm_start <= 1'b1;
          state      <= S_OUT_WAIT;
        end

        S_OUT_WAIT: if (outm_done) begin
          result <= {1'b0, outm_early, 14'(outm_n_cmp), 16'(outm_label)};
          state  <= S_PUSH;
        end

        S_PUSH: if (!out_full) begin
          out_push <= 1'b1;
          state    <= S_FETCH;
        end

        default: state <= S_FETCH;
      endcase
    end
  end

  assign busy = (state != S_FETCH) || iw_busy;
endmodule
