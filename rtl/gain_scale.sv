// gain_scale - the "divide by N" and "epsilon" boxes of the adaptive loop.
//
// Turns an accumulated sum of F*conj(R) products into a weight increment:
//   delta = sum * epsilon / N,  with N = 2**log2n and epsilon = 2**-eps_shift.
// The result is expressed in the fixed-point format of the weight G, which has
// G_FRAC fractional bits, so the operation is one arithmetic shift by
// (G_FRAC - log2n - eps_shift) with round-half-up and saturation to G_W bits.
// The paper makes N and epsilon user selectable and only ever uses powers of
// two for them (N = 1, epsilon about 2**-11 and 2**-15); restricting both to
// powers of two, so that the divider and the gain become a single shift, is a
// choice of this implementation.  Combinational, zero latency.
module gain_scale
  import rfi_pkg::*;
#(
  parameter int unsigned ACC_W  = 2*DATA_W + 1 + ACC_LOG2_MAX,
  parameter int unsigned OUT_W  = G_W,
  parameter int unsigned FRAC   = G_FRAC,
  parameter int unsigned N_W    = $clog2(ACC_LOG2_MAX + 1),
  parameter int unsigned E_W    = EPS_W
) (
  input  logic signed [ACC_W-1:0] acc_re,
  input  logic signed [ACC_W-1:0] acc_im,
  input  logic        [N_W-1:0]   log2n,      // N = 2**log2n
  input  logic        [E_W-1:0]   eps_shift,  // epsilon = 2**-eps_shift
  output logic signed [OUT_W-1:0] delta_re,
  output logic signed [OUT_W-1:0] delta_im,
  output logic                    sat         // a component was clipped
);

  localparam int unsigned WIDE = ACC_W + FRAC + 1;
  localparam logic signed [WIDE-1:0] ONE  = 1;
  localparam logic signed [WIDE-1:0] MAXV = (ONE <<< (OUT_W-1)) - ONE;
  localparam logic signed [WIDE-1:0] MINV = -(ONE <<< (OUT_W-1));

  function automatic logic signed [OUT_W-1:0] scale1(
      input logic signed [ACC_W-1:0] v, input int unsigned sh, output logic clip);
    logic signed [WIDE-1:0] w;
    w = WIDE'(v) <<< FRAC;
    if (sh > 0) w = (w + (ONE <<< (sh - 1))) >>> sh;
    clip = 1'b0;
    if (w > MAXV) begin
      clip = 1'b1;
      w = MAXV;
    end else if (w < MINV) begin
      clip = 1'b1;
      w = MINV;
    end
    return w[OUT_W-1:0];
  endfunction

  always_comb begin
    int unsigned sh;
    logic c_re, c_im;
    sh = int'(log2n) + int'(eps_shift);
    delta_re = scale1(acc_re, sh, c_re);
    delta_im = scale1(acc_im, sh, c_im);
    sat = c_re | c_im;
  end

endmodule
