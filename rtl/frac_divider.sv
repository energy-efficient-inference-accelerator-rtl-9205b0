// frac_divider -- sequential restoring divider for the softmax ("div" block).
//
// Eq. 1 normalises every exponentiated score by the sum of all of them.  The
// paper names a "div" block for this and notes that the division cannot be
// parallelised; how it divides is not given.  This unit is a radix-2
// restoring divider that only produces the bits the attention weight needs:
// because num <= den the quotient lies in [0, 1], so one step decides the
// integer bit and FRAC further steps the fraction bits.
//
// Interface: pulse start with num and den valid (den > 0, num <= den).
// busy is high while dividing; done pulses for one cycle FRAC+1 cycles after
// start, with q = floor(num * 2^FRAC / den) (unsigned, FRAC fractional bits,
// FRAC+1 bits wide).  A start while busy is ignored.
module frac_divider #(
  parameter int unsigned NUM_W = 38,
  parameter int unsigned FRAC  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [NUM_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [FRAC:0]    q
);
  logic [NUM_W-1:0]        rem;      // always below den
  logic [NUM_W-1:0]        div_r;
  logic [$clog2(FRAC+2)-1:0] step;
  logic [NUM_W:0]          rem_sh;   // one guard bit for the shift

  assign rem_sh = {rem, 1'b0};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      rem  <= '0;
      div_r <= '0;
      step <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          div_r <= den;
          step  <= '0;
          // integer bit
          if (num >= den) begin
            q   <= (FRAC+1)'(1) << FRAC;
            rem <= num - den;
          end else begin
            q   <= '0;
            rem <= num;
          end
        end
      end else begin
        // one fraction bit per cycle, most significant first
        if (rem_sh >= {1'b0, div_r}) begin
          rem <= NUM_W'(rem_sh - {1'b0, div_r});
          q[FRAC-1-int'(step)] <= 1'b1;
        end else begin
          rem <= rem_sh[NUM_W-1:0];
        end
        step <= step + 1'b1;
        if (int'(step) == FRAC-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
