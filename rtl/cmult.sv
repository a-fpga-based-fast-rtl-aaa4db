// cmult - full-precision complex multiplier.
//
// Computes p = a * b, or p = a * conj(b) when CONJ_B is set.  These are the
// two multipliers of the adaptive loop: F * conj(R) feeding the accumulator,
// and G * R feeding the subtractor.  Operands are signed two's complement, real
// and imaginary parts separate.  The product keeps every bit (A_W + B_W + 1
// bits per component), so no rounding or overflow happens here; callers round.
// Purely combinational: zero latency.  Pipelining is left to the surrounding
// blocks (the paper does not describe the multiplier's insides).
module cmult #(
  parameter int unsigned A_W    = 18,
  parameter int unsigned B_W    = 18,
  parameter bit          CONJ_B = 1'b0
) (
  input  logic signed [A_W-1:0]   a_re,
  input  logic signed [A_W-1:0]   a_im,
  input  logic signed [B_W-1:0]   b_re,
  input  logic signed [B_W-1:0]   b_im,
  output logic signed [A_W+B_W:0] p_re,
  output logic signed [A_W+B_W:0] p_im
);

  logic signed [A_W+B_W-1:0] rr, ii, ri, ir;

  always_comb begin
    rr = a_re * b_re;
    ii = a_im * b_im;
    ri = a_re * b_im;
    ir = a_im * b_re;
    if (CONJ_B) begin
      // (ar + j ai)(br - j bi) = (ar br + ai bi) + j (ai br - ar bi)
      p_re = (A_W+B_W+1)'(rr) + (A_W+B_W+1)'(ii);
      p_im = (A_W+B_W+1)'(ir) - (A_W+B_W+1)'(ri);
    end else begin
      p_re = (A_W+B_W+1)'(rr) - (A_W+B_W+1)'(ii);
      p_im = (A_W+B_W+1)'(ir) + (A_W+B_W+1)'(ri);
    end
  end

endmodule
