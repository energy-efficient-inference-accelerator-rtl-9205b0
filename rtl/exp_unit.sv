// exp_unit -- fixed-point exponential for the softmax of the MEM module.
//
// The paper's MEM module passes every attention score M_a,i . k through an
// "exp" block before the sum and the division (Eq. 1); it does not say how
// exp is computed.  This unit uses the simplest synthesizable method:
//   e^x = 2^(x*log2 e) = 2^n * 2^f,   n = floor(x*log2 e),  0 <= f < 1,
//   2^f ~= 1 + f*(0.6565 + 0.3435*f)            (max. relative error ~0.3%)
// followed by a shift by n.  The input is clamped to [XMIN, XMAX] so the
// result fits the unsigned output; the softmax is insensitive to the clamp
// as long as scores stay within it.
//
// Interface: x is a signed Q8.8 score, y = e^x as unsigned Q16.16 (32 bits).
// Combinational, no state.
module exp_unit #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned EXP_W  = 32,
  parameter int unsigned EXP_FRAC = 16
) (
  input  logic signed [DATA_W-1:0] x,
  output logic        [EXP_W-1:0]  y
);
  // log2(e) in Q2.14, polynomial constants in Q0.16
  localparam logic signed [17:0] LOG2E = 18'sd23637;
  localparam logic [16:0] C1 = 17'd43024;   // 0.6565
  localparam logic [16:0] C2 = 17'd22512;   // 0.3435
  localparam int          XMAX = 11 << FRAC;   // e^11 * 2^16 < 2^32
  localparam int          XMIN = -(16 << FRAC);

  logic signed [DATA_W-1:0] xc;
  logic signed [39:0]       t;       // x * log2e, FRAC+14 fractional bits
  logic signed [39:0]       n;       // integer part
  logic        [15:0]       f;       // fractional part, Q0.16
  logic        [33:0]       inner;
  logic        [33:0]       mant;    // 2^f in Q1.16
  logic        [63:0]       shifted;

  always_comb begin
    if (int'(x) > XMAX)      xc = DATA_W'(XMAX);
    else if (int'(x) < XMIN) xc = DATA_W'(XMIN);
    else                     xc = x;
    t = 40'(xc) * 40'(LOG2E);
    n = t >>> (FRAC + 14);
    f = t[FRAC+13 -: 16];
    inner = 34'(C1) + ((34'(C2) * 34'(f)) >> 16);
    mant  = 34'(17'h10000) + ((inner * 34'(f)) >> 16);
    // mant has 16 fractional bits, the output has EXP_FRAC
    shifted = 64'(mant) << (EXP_FRAC - 16);
    if (n >= 0) shifted = shifted << n[5:0];
    else        shifted = shifted >> (-n);
    y = shifted[EXP_W-1:0];
  end
endmodule
