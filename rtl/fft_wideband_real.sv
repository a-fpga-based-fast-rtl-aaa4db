// fft_wideband_real - parallel FFT for a real sample stream that arrives
// LANES samples per clock: the "FFT" box of the block diagram at the full
// 2 GSPS rate (8 lanes at 250 MHz by default).
//
// Lane l carries samples x[LANES*m + l].  With P = 2*NCH points and
// M = P/LANES, the transform splits as
//   X[k1 + M*k2] = sum_l W_LANES^(l*k2) * ( W_P^(l*k1) * Y_l[k1] ),
// where Y_l is the M-point FFT of lane l.  So each lane runs a streaming
// M-point FFT (fft_r2sdf, all bins kept); their outputs arrive together, in
// the same bit-reversed k1 order.  A rotation by W_P^(l*k1) (per-lane twiddle
// ROM) and a direct LANES-point DFT across the lanes follow.  Only the lower
// half of the spectrum is kept (k2 < LANES/2), so LANES/2 channels leave per
// clock: output lane j carries channel k1 + M*j, and out_bin is k1.  A
// spectrum starts with k1 = 0.
//
// shift_sched has one bit per radix-2 level: bits [LOG2M-1:0] are the lane
// FFTs' stages, the upper LOG2L bits the cross-lane levels; each set bit
// halves the data (the cross-lane part applies all its halvings at once).
// Results are rounded and saturated to W bits; ovf pulses on saturation.
// Latency: the lane FFT plus 2 clocks.  The whole parallel structure is a
// choice of this implementation: the paper only names a pipelined FFT with
// 4096 channels at 2 GSPS.
module fft_wideband_real
  import rfi_pkg::*;
#(
  parameter int unsigned NCH    = CHANNELS,
  parameter int unsigned NLANES = LANES,
  parameter int unsigned IN_W   = ADC_W,
  parameter int unsigned W      = DATA_W,
  parameter int unsigned TWW    = TW_W,
  parameter int unsigned LOG2P  = $clog2(2 * NCH),
  parameter int unsigned LOG2L  = $clog2(NLANES),
  parameter int unsigned LOG2M  = LOG2P - LOG2L,
  parameter int unsigned OL     = NLANES / 2
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [LOG2P-1:0]       shift_sched,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_samples [NLANES],
  output logic                   out_valid,
  output logic [LOG2M-1:0]       out_bin,
  output logic signed [W-1:0]    out_re [OL],
  output logic signed [W-1:0]    out_im [OL],
  output logic                   ovf
);

  localparam int unsigned M   = 1 << LOG2M;
  localparam int unsigned P   = 1 << LOG2P;
  localparam int unsigned TF  = TWW - 2;
  localparam int unsigned ZW  = W + 1;                    // rotated lane value
  localparam int unsigned SW  = ZW + TWW + LOG2L + 2;     // cross-lane sum

  // ---------------------------------------------------------- lane FFTs
  logic                 y_v   [NLANES];
  logic [LOG2M-1:0]     y_bin [NLANES];
  logic signed [W-1:0]  y_re  [NLANES];
  logic signed [W-1:0]  y_im  [NLANES];
  logic [NLANES-1:0]    y_ovf;

  for (genvar l = 0; l < int'(NLANES); l++) begin : g_lane
    fft_r2sdf #(.NCH(M / 2), .IN_W(IN_W), .W(W), .TWW(TWW), .KEEP_ALL(1'b1)) u_fft (
      .clk(clk), .rst(rst), .shift_sched(shift_sched[LOG2M-1:0]),
      .in_valid(in_valid), .in_sample(in_samples[l]),
      .out_valid(y_v[l]), .out_bin(y_bin[l]), .out_re(y_re[l]), .out_im(y_im[l]),
      .ovf(y_ovf[l])
    );
  end

  // ---------------------------------------------------------- twiddles
  logic signed [TWW-1:0] rot_re [NLANES][M];    // W_P^(l*k1)
  logic signed [TWW-1:0] rot_im [NLANES][M];
  logic signed [TWW-1:0] dft_re [NLANES];       // W_LANES^q
  logic signed [TWW-1:0] dft_im [NLANES];

  // W_P^(l*k) by the recurrence over k (Q60, see rfi_pkg), rounded to TF
  // fraction bits, halves away from zero; W_LANES^l directly.
  localparam int          TW_SH = TW_Q - int'(TF);
  localparam tw_t         TW_H  = tw_t'(1) <<< (TW_SH - 1);
  initial begin
    automatic tw_t c1, s1, c, s, t;
    for (int l = 0; l < int'(NLANES); l++) begin
      c1 = tw_cs(longint'(l), longint'(P), 1'b0);
      s1 = tw_cs(longint'(l), longint'(P), 1'b1);
      c  = TW_ONE;
      s  = '0;
      for (int k = 0; k < int'(M); k++) begin
        rot_re[l][k] = TWW'((c >= 0) ? ((c + TW_H) >>> TW_SH) : -((-c + TW_H) >>> TW_SH));
        rot_im[l][k] = TWW'((s >= 0) ? -((s + TW_H) >>> TW_SH) : ((-s + TW_H) >>> TW_SH));
        t = (c * c1 - s * s1) >>> TW_Q;
        s = (s * c1 + c * s1) >>> TW_Q;
        c = t;
      end
      dft_re[l] = TWW'(tw_round(tw_cs(longint'(l), longint'(NLANES), 1'b0), int'(TF)));
      dft_im[l] = TWW'(-tw_round(tw_cs(longint'(l), longint'(NLANES), 1'b1), int'(TF)));
    end
  end

  // ---------------------------------------------------------- rotation
  logic                 z_v;
  logic [LOG2M-1:0]     z_bin;
  logic signed [ZW-1:0] z_re [NLANES];
  logic signed [ZW-1:0] z_im [NLANES];

  for (genvar l = 0; l < int'(NLANES); l++) begin : g_rot
    logic signed [W+TWW:0] p_re, p_im;
    logic signed [W+TWW:0] r_re, r_im;
    cmult #(.A_W(W), .B_W(TWW), .CONJ_B(1'b0)) u_rot (
      .a_re(y_re[l]), .a_im(y_im[l]),
      .b_re(rot_re[l][y_bin[0]]), .b_im(rot_im[l][y_bin[0]]),
      .p_re(p_re), .p_im(p_im)
    );
    assign r_re = (p_re + ((W+TWW+1)'(1) <<< (TF - 1))) >>> TF;
    assign r_im = (p_im + ((W+TWW+1)'(1) <<< (TF - 1))) >>> TF;
    always_ff @(posedge clk) begin
      z_re[l] <= r_re[ZW-1:0];
      z_im[l] <= r_im[ZW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) z_v <= 1'b0;
    else     z_v <= y_v[0];
    z_bin <= y_bin[0];
  end

  // ---------------------------------------------------------- cross-lane DFT
  int unsigned xsh;
  always_comb begin
    xsh = 0;
    for (int b = int'(LOG2M); b < int'(LOG2P); b++) xsh += int'(shift_sched[b]);
  end

  logic signed [W-1:0] x_re [OL];
  logic signed [W-1:0] x_im [OL];
  logic [OL-1:0]       x_clip;

  always_comb begin
    for (int j = 0; j < int'(OL); j++) begin
      logic signed [SW-1:0] acc_re, acc_im, t_re, t_im;
      logic clip;
      acc_re = '0;
      acc_im = '0;
      for (int l = 0; l < int'(NLANES); l++) begin
        int q;
        q = (l * j) % int'(NLANES);
        acc_re += SW'(z_re[l]) * SW'(dft_re[q]) - SW'(z_im[l]) * SW'(dft_im[q]);
        acc_im += SW'(z_re[l]) * SW'(dft_im[q]) + SW'(z_im[l]) * SW'(dft_re[q]);
      end
      t_re = (acc_re + (SW'(1) <<< (TF + xsh - 1))) >>> (TF + xsh);
      t_im = (acc_im + (SW'(1) <<< (TF + xsh - 1))) >>> (TF + xsh);
      clip = 1'b0;
      if (t_re > SW'((1 << (W-1)) - 1)) begin clip = 1'b1; t_re = SW'((1 << (W-1)) - 1); end
      if (t_re < -SW'(1 << (W-1)))      begin clip = 1'b1; t_re = -SW'(1 << (W-1)); end
      if (t_im > SW'((1 << (W-1)) - 1)) begin clip = 1'b1; t_im = SW'((1 << (W-1)) - 1); end
      if (t_im < -SW'(1 << (W-1)))      begin clip = 1'b1; t_im = -SW'(1 << (W-1)); end
      x_re[j]   = t_re[W-1:0];
      x_im[j]   = t_im[W-1:0];
      x_clip[j] = clip;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      ovf       <= 1'b0;
    end else begin
      out_valid <= z_v;
      ovf       <= (|y_ovf) || (z_v && (|x_clip));
    end
    out_bin <= z_bin;
    out_re  <= x_re;
    out_im  <= x_im;
  end

  initial begin
    if (NLANES < 2 || (1 << LOG2L) != NLANES) $error("fft_wideband_real: NLANES must be a power of two >= 2");
    if (LOG2M < 2) $error("fft_wideband_real: at least 4 points per lane");
  end

endmodule
