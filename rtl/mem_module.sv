// mem_module -- external memory of the network: address memory, content
// memory and content-based soft addressing (the MEM module).
//
// Every story sentence is stored twice: its W_emb_a embedding in the address
// memory and its W_emb_c embedding in the content memory (one slot each).
// A read with key k computes, as in Eqs. 1 and 5,
//   a_i = exp(M_a,i . k) / sum_j exp(M_a,j . k),   r = sum_i a_i M_c,i
// with element-wise sequential operations, as the paper describes:
//   SCORE  one slot per cycle: M_a,i . k in the multiplier/adder tree, exp,
//          the result into the exp register file and the running sum into
//          the accumulator;
//   NORM   one slot at a time through the sequential divider; a_i into the
//          address register file;
//   READC  one slot per cycle: a_i times M_c,i added into the E-wide read
//          vector accumulator.
// Only the n_slots valid slots take part.  With no valid slot r is zero.
// The structure (address/content memory, exp, exp reg, accumulator, div,
// address reg, multiply-accumulate into r) follows the paper's figure; the
// number formats and the pipelining are this design's own choice.  The
// softmax subtracts no maximum (scores are clamped inside exp_unit).
//
// Interface: wr_en/wr_slot/wr_a/wr_c write one slot.  Pulse start with key
// valid (key is sampled during the whole read and must stay stable); done
// pulses when r is valid; r holds until the next start.
// Latency for n valid slots, from start to done: n+2 cycles of SCORE,
// n*(FRAC+2) of NORM, n+2 of READC and 2 more, n*(FRAC+4)+6 in all (606
// cycles for 50 slots); 2 cycles with no valid slot.
module mem_module
  import mann_pkg::*;
#(
  parameter int unsigned EMB   = mann_pkg::DEF_EMB,
  parameter int unsigned SLOTS = mann_pkg::DEF_SLOTS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // write port from INPUT & WRITE
  input  logic                              wr_en,
  input  logic [$clog2(SLOTS)-1:0]          wr_slot,
  input  logic signed [EMB-1:0][DATA_W-1:0] wr_a,
  input  logic signed [EMB-1:0][DATA_W-1:0] wr_c,
  input  logic [$clog2(SLOTS+1)-1:0]        n_slots,
  // read
  input  logic                              start,
  input  logic signed [EMB-1:0][DATA_W-1:0] key,
  output logic                              busy,
  output logic                              done,
  output logic signed [EMB-1:0][DATA_W-1:0] r
);
  localparam int unsigned SW   = $clog2(SLOTS);
  localparam int unsigned NW   = $clog2(SLOTS+1);
  localparam int unsigned SUM_W = EXP_W + $clog2(SLOTS) + 1;

  typedef enum logic [2:0] {S_IDLE, S_SCORE, S_NORM, S_READC, S_DONE} state_e;
  state_e state;

  logic signed [EMB-1:0][DATA_W-1:0] amem [SLOTS];   // address memory
  logic signed [EMB-1:0][DATA_W-1:0] cmem [SLOTS];   // content memory
  logic        [EXP_W-1:0]           exp_reg  [SLOTS];
  logic        [FRAC:0]              addr_reg [SLOTS]; // attention a_i, Q0.FRAC

  logic [NW-1:0]   n_q, rd_i, nrm_i;
  logic            v1;
  logic [SW-1:0]   idx1;
  logic signed [EMB-1:0][DATA_W-1:0] row_q;
  logic [FRAC:0]   a_q;
  logic [SUM_W-1:0] sum;
  logic signed [ACC_W-1:0] racc [EMB];

  logic signed [ACC_W-1:0] score_full;
  logic signed [DATA_W-1:0] score;
  logic        [EXP_W-1:0]  e_val;
  logic            div_start, div_busy, div_done, div_issued;
  logic [FRAC:0]   div_q;

  // ---- memories ----
  always_ff @(posedge clk) begin
    if (wr_en) begin
      amem[wr_slot] <= wr_a;
      cmem[wr_slot] <= wr_c;
    end
  end

  // ---- score datapath: adder tree and exp ----
  dot_product #(.N(EMB), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_score (
    .a(row_q), .b(key), .y(score_full));
  assign score = sat_q(score_full);
  exp_unit #(.DATA_W(DATA_W), .FRAC(FRAC), .EXP_W(EXP_W), .EXP_FRAC(EXP_FRAC)) u_exp (
    .x(score), .y(e_val));

  // ---- softmax divider ----
  assign div_start = (state == S_NORM) && !div_issued && !div_busy;
  frac_divider #(.NUM_W(SUM_W), .FRAC(FRAC)) u_div (
    .clk, .rst_n, .start(div_start),
    .num(SUM_W'(exp_reg[SW'(nrm_i)])), .den(sum),
    .busy(div_busy), .done(div_done), .q(div_q));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      n_q   <= '0;
      rd_i  <= '0;
      nrm_i <= '0;
      v1    <= 1'b0;
      idx1  <= '0;
      row_q <= '0;
      a_q   <= '0;
      sum   <= '0;
      div_issued <= 1'b0;
      r     <= '0;
      for (int e = 0; e < EMB; e++) racc[e] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_q  <= n_slots;
          rd_i <= '0;
          v1   <= 1'b0;
          sum  <= '0;
          for (int e = 0; e < EMB; e++) racc[e] <= '0;
          if (n_slots == '0) begin
            r     <= '0;
            state <= S_DONE;
          end else begin
            state <= S_SCORE;
          end
        end

        S_SCORE: begin
          // stage 1: read the address memory
          if (rd_i < n_q) begin
            row_q <= amem[SW'(rd_i)];
            idx1  <= SW'(rd_i);
            v1    <= 1'b1;
            rd_i  <= rd_i + 1'b1;
          end else begin
            v1 <= 1'b0;
          end
          // stage 2: dot product, exp, exp reg and accumulator
          if (v1) begin
            exp_reg[idx1] <= e_val;
            sum <= sum + SUM_W'(e_val);
          end
          if (rd_i == n_q && !v1) begin
            state <= S_NORM;
            nrm_i <= '0;
            div_issued <= 1'b0;
          end
        end

        S_NORM: begin
          if (div_start) div_issued <= 1'b1;
          if (div_done) begin
            addr_reg[SW'(nrm_i)] <= div_q;
            div_issued <= 1'b0;
            if (nrm_i == n_q - 1'b1) begin
              state <= S_READC;
              rd_i  <= '0;
              v1    <= 1'b0;
            end
            nrm_i <= nrm_i + 1'b1;
          end
        end

        S_READC: begin
          // stage 1: read the content memory and the attention weight
          if (rd_i < n_q) begin
            row_q <= cmem[SW'(rd_i)];
            a_q   <= addr_reg[SW'(rd_i)];
            v1    <= 1'b1;
            rd_i  <= rd_i + 1'b1;
          end else begin
            v1 <= 1'b0;
          end
          // stage 2: multiply and accumulate into r
          if (v1) begin
            for (int e = 0; e < EMB; e++)
              racc[e] <= racc[e] + ACC_W'(signed'({1'b0, a_q}) * signed'(row_q[e]));
          end
          if (rd_i == n_q && !v1) begin
            for (int e = 0; e < EMB; e++) r[e] <= sat_q(racc[e]);
            state <= S_DONE;
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
