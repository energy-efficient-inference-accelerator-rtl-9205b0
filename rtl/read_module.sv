// read_module -- recurrent controller of the memory network (READ module).
//
// Each hop t uses a read key k^t (Eq. 3): the embedded question W_emb_q q on
// the first hop, the previous controller output h^(t-1) afterwards.  The
// multiplexer at the module's input makes that choice and the key register
// holds k^t for the MEM module.  While MEM works, the module computes W_r k^t
// one row per cycle in its multiplier/adder tree and keeps the result in the
// read control register; once MEM returns the read vector r^t it forms
//   h^t = r^t + W_r k^t                                   (Eq. 4)
// which is both the next key (the recurrent path) and the input of the
// OUTPUT module after the last hop.  The structure follows the paper's
// figure; the row-serial schedule and the overlap with MEM are this design's
// own choice.
//
// Interface: pulse start (with first high on hop 1 and q_vec valid); key is
// valid from the next cycle until the next start.  Pulse r_valid with r_vec
// when the MEM module is done (at any time after start).  h_valid pulses
// when h is updated; h holds until the next hop.  W_r is loaded through
// wload (target T_WR, row-major).  W_r k takes EMB+2 cycles.
module read_module
  import mann_pkg::*;
#(
  parameter int unsigned EMB = mann_pkg::DEF_EMB
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  wload_t                            wload,
  input  logic                              start,
  input  logic                              first,
  input  logic signed [EMB-1:0][DATA_W-1:0] q_vec,
  input  logic                              r_valid,
  input  logic signed [EMB-1:0][DATA_W-1:0] r_vec,
  output logic signed [EMB-1:0][DATA_W-1:0] key,
  output logic signed [EMB-1:0][DATA_W-1:0] h,
  output logic                              h_valid,
  output logic                              busy
);
  localparam int unsigned JW = $clog2(EMB+1);

  typedef enum logic [1:0] {S_IDLE, S_WK, S_WAIT} state_e;
  state_e state;

  logic signed [EMB-1:0][DATA_W-1:0] wr_mem [EMB];   // W_r, one row per entry
  logic signed [EMB-1:0][DATA_W-1:0] row_q;
  logic signed [EMB-1:0][DATA_W-1:0] wk;              // read ctrl reg
  logic signed [EMB-1:0][DATA_W-1:0] r_q;
  logic signed [ACC_W-1:0]           dot;
  logic [JW-1:0] j;
  logic          v1;
  logic [JW-1:0] j1;
  logic          r_got;

  always_ff @(posedge clk) begin
    if (wload.valid && wload.target == T_WR &&
        32'(wload.row) < EMB && 32'(wload.col) < EMB)
      wr_mem[wload.row][wload.col] <= wload.data;
  end

  dot_product #(.N(EMB), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_tree (
    .a(row_q), .b(key), .y(dot));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      key     <= '0;
      h       <= '0;
      h_valid <= 1'b0;
      wk      <= '0;
      r_q     <= '0;
      row_q   <= '0;
      j       <= '0;
      j1      <= '0;
      v1      <= 1'b0;
      r_got   <= 1'b0;
    end else begin
      h_valid <= 1'b0;
      if (r_valid) begin
        r_q   <= r_vec;
        r_got <= 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          key   <= first ? q_vec : h;    // key multiplexer, Eq. 3
          j     <= '0;
          v1    <= 1'b0;
          r_got <= 1'b0;
          state <= S_WK;
        end
        S_WK: begin
          if (32'(j) < EMB) begin
            row_q <= wr_mem[j];
            j1    <= j;
            v1    <= 1'b1;
            j     <= j + 1'b1;
          end else begin
            v1 <= 1'b0;
          end
          if (v1) wk[j1] <= sat_q(dot);
          if (32'(j) == EMB && !v1) state <= S_WAIT;
        end
        S_WAIT: if (r_got) begin
          for (int e = 0; e < EMB; e++)
            h[e] <= sat_w(ACC_W'(signed'(r_q[e])) + ACC_W'(signed'(wk[e])));
          h_valid <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
