// output_module -- output layer with maximum inner-product search and
// inference thresholding (OUTPUT module).
//
// The answer is the label with the largest logit z_i = W_o,i . h (Eq. 6).
// The vocabulary is far larger than the embedding, so the logits are computed
// one per cycle, each as a dot product in the multiplier/adder tree, and the
// compare stage keeps the running maximum in the output register.
//
// Inference thresholding (Algorithm 1, step 4): with ith_en high the labels
// are visited in the order A held in the order table (sorted offline by
// silhouette coefficient), and the search stops at the first label a whose
// logit exceeds its threshold theta_a; that label is the answer.  If no
// logit exceeds its threshold, the answer is the argmax over all labels.
// With ith_en low the labels are visited in natural order 0..VOCAB-1 and all
// are compared (the conventional search).  The thresholds and the order are
// computed offline from the training set (steps 1-3) and loaded like
// weights.  The search rule and the strict "z > theta" comparison follow the
// paper; the table formats, the pipeline and the tie rule (the first of
// equal maxima wins) are this design's own choice.
//
// Interface: pulse start with h valid (h must stay stable until done).
// done pulses with label, n_cmp (logits computed) and early (stopped by a
// threshold).  Tables load through wload: T_WO (row = label, col = element),
// T_THETA (row = label, Q8.8), T_ORDER (row = position, data = label).
// Timing: one logit per cycle after a 3-cycle pipeline fill; a full search
// takes VOCAB+5 cycles from start to done (182 for 177 labels).
module output_module
  import mann_pkg::*;
#(
  parameter int unsigned EMB   = mann_pkg::DEF_EMB,
  parameter int unsigned VOCAB = mann_pkg::DEF_VOCAB
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  wload_t                            wload,
  input  logic                              start,
  input  logic                              ith_en,
  input  logic signed [EMB-1:0][DATA_W-1:0] h,
  output logic                              done,
  output logic [$clog2(VOCAB)-1:0]          label,
  output logic [$clog2(VOCAB+1)-1:0]        n_cmp,
  output logic                              early,
  output logic                              busy
);
  localparam int unsigned IW = $clog2(VOCAB);
  localparam int unsigned CW = $clog2(VOCAB+1);

  logic signed [EMB-1:0][DATA_W-1:0] wo_mem [VOCAB];
  logic signed [DATA_W-1:0]          theta  [VOCAB];
  logic        [IW-1:0]              order  [VOCAB];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  logic [CW-1:0] i;
  logic          v0, v1, stop, found;
  logic [IW-1:0] a0, a1;
  logic signed [EMB-1:0][DATA_W-1:0] w_q;
  logic signed [DATA_W-1:0]          th_q;
  logic signed [ACC_W-1:0]           z, best;
  logic                              z_gt_th;

  // ---- table loads ----
  always_ff @(posedge clk) begin
    if (wload.valid && 32'(wload.row) < VOCAB) begin
      if (wload.target == T_WO && 32'(wload.col) < EMB)
        wo_mem[wload.row][wload.col] <= wload.data;
      if (wload.target == T_THETA)
        theta[wload.row] <= wload.data;
      if (wload.target == T_ORDER)
        order[wload.row] <= IW'(wload.data);
    end
  end

  // ---- logit: multiplier and adder tree ----
  dot_product #(.N(EMB), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_tree (
    .a(w_q), .b(h), .y(z));

  // threshold in the logit's scale (2*FRAC fractional bits)
  assign z_gt_th = z > (ACC_W'(th_q) <<< FRAC);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      label <= '0;
      n_cmp <= '0;
      early <= 1'b0;
      i     <= '0;
      v0    <= 1'b0;
      v1    <= 1'b0;
      stop  <= 1'b0;
      found <= 1'b0;
      a0    <= '0;
      a1    <= '0;
      w_q   <= '0;
      th_q  <= '0;
      best  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          i     <= '0;
          v0    <= 1'b0;
          v1    <= 1'b0;
          stop  <= 1'b0;
          found <= 1'b0;
          early <= 1'b0;
          n_cmp <= '0;
          state <= S_RUN;
        end

        S_RUN: begin
          // stage 0: index (order table or natural order)
          if (32'(i) < VOCAB && !stop) begin
            a0 <= ith_en ? order[IW'(i)] : IW'(i);
            v0 <= 1'b1;
            i  <= i + 1'b1;
          end else begin
            v0 <= 1'b0;
          end
          // stage 1: weight row and threshold
          if (v0 && 32'(a0) < VOCAB) begin
            w_q  <= wo_mem[a0];
            th_q <= theta[a0];
          end else begin
            w_q  <= '0;
            th_q <= '0;
          end
          a1 <= a0;
          v1 <= v0 && !stop;
          // stage 2: logit, compare with the maximum and the threshold
          if (v1 && !stop) begin
            n_cmp <= n_cmp + 1'b1;
            if (!found || z > best) begin
              best  <= z;
              label <= a1;
              found <= 1'b1;
            end
            if (ith_en && z_gt_th) begin
              label <= a1;
              early <= 1'b1;
              stop  <= 1'b1;
            end
          end
          if (stop || (32'(i) == VOCAB && !v0 && !v1)) state <= S_DONE;
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
