// dot_product -- N parallel multipliers feeding a binary adder tree.
//
// This is the "adder tree" datapath that appears in the MEM, READ and OUTPUT
// modules of the accelerator: one weight row and one activation vector go
// in, their inner product comes out in the same cycle.  The paper shows the
// multiplier and the tree; the full-width (unrounded) result and the plain
// combinational form are this design's own choice.
//
// Interface: a and b are packed vectors of N signed DATA_W-bit elements;
// y = sum_i a[i]*b[i] as a signed ACC_W-bit value with 2*FRAC fractional bits
// when both operands are Q8.8.  Purely combinational: the users register the
// result.  The tree is padded to the next power of two with zero leaves.
module dot_product #(
  parameter int unsigned N      = 20,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 40
) (
  input  logic signed [N-1:0][DATA_W-1:0] a,
  input  logic signed [N-1:0][DATA_W-1:0] b,
  output logic signed [ACC_W-1:0]         y
);
  localparam int unsigned P = (N > 1) ? (1 << $clog2(N)) : 1;

  // node[1] is the root, node[P+i] the leaves
  logic signed [ACC_W-1:0] node [1:2*P-1];

  always_comb begin
    for (int i = 0; i < P; i++) begin
      if (i < N) node[P+i] = ACC_W'(signed'(a[i]) * signed'(b[i]));
      else       node[P+i] = '0;
    end
    for (int j = P-1; j >= 1; j--) begin
      node[j] = node[2*j] + node[2*j+1];
    end
  end

  assign y = node[1];
endmodule
