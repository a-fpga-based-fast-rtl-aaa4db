// fft_sdf_stage - one radix-2 decimation-in-frequency stage of a streaming
// (single-path delay-feedback, SDF) FFT.
//
// The stage works on blocks of 2*D samples (D = 2**LOG2D).  During the first
// half of a block the inputs are written into a D-deep delay line while the
// delay line returns the differences of the previous block, which leave
// multiplied by the twiddle factor W_2D**j = exp(-j*pi*j/D).  During the
// second half each input x[j+D] meets x[j] from the delay line: the sum
// x[j]+x[j+D] leaves at once and the difference x[j]-x[j+D] is stored.  The
// output stream therefore holds, per block, the D sums followed by the D
// rotated differences, delayed by D samples.  One sample per clock at most;
// in_valid may have gaps (everything advances only on valid samples).
//
// Scaling: when `shift` is high the sum and difference are halved (round half
// up), as in the run-time FFT shift schedules used on radio-astronomy FPGA
// boards; every result is saturated to W bits and `ovf` pulses when a value
// was clipped.  Output is registered: one cycle after the input.
// Twiddles are Q2.(TW_W-2) numbers computed at elaboration with the integer
// cos/sin functions of rfi_pkg.
module fft_sdf_stage #(
  parameter int unsigned W     = 18,
  parameter int unsigned TW_W  = 18,
  parameter int unsigned LOG2D = 2
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                shift,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im,
  output logic                ovf
);

  localparam int unsigned D  = 1 << LOG2D;
  localparam int unsigned AW = (LOG2D > 0) ? LOG2D : 1;
  localparam int unsigned TF = TW_W - 2;   // twiddle fraction bits

  logic signed [W-1:0]    dl_re [D];
  logic signed [W-1:0]    dl_im [D];
  logic signed [TW_W-1:0] tw_re [D];
  logic signed [TW_W-1:0] tw_im [D];

  // W_2D**j = exp(-i*2*pi*j/(2D)) by the recurrence w[j+1] = w[j] * w[1]
  // (Q60, see rfi_pkg), rounded to TF fraction bits, halves away from zero.
  localparam int          TW_SH = rfi_pkg::TW_Q - int'(TF);
  localparam rfi_pkg::tw_t TW_H = rfi_pkg::tw_t'(1) <<< (TW_SH - 1);
  initial begin
    automatic rfi_pkg::tw_t c1, s1, c, s, t;
    c1 = rfi_pkg::tw_cs(64'sd1, longint'(2 * D), 1'b0);
    s1 = rfi_pkg::tw_cs(64'sd1, longint'(2 * D), 1'b1);
    c  = rfi_pkg::TW_ONE;
    s  = '0;
    for (int j = 0; j < int'(D); j++) begin
      tw_re[j] = TW_W'((c >= 0) ? ((c + TW_H) >>> TW_SH) : -((-c + TW_H) >>> TW_SH));
      tw_im[j] = TW_W'((s >= 0) ? -((s + TW_H) >>> TW_SH) : ((-s + TW_H) >>> TW_SH));
      t = (c * c1 - s * s1) >>> rfi_pkg::TW_Q;
      s = (s * c1 + c * s1) >>> rfi_pkg::TW_Q;
      c = t;
    end
  end

  logic [LOG2D:0] cnt;
  logic           phase;
  logic [AW-1:0]  addr;
  logic           primed;

  assign phase = cnt[LOG2D];
  assign addr  = AW'(cnt & (LOG2D+1)'(D - 1));

  // Round-half-up optional halving, then saturation to W bits.
  function automatic logic signed [W-1:0] fit(input logic signed [W:0] v,
                                              input logic halve, output logic clip);
    logic signed [W+1:0] t;
    t = (W+2)'(v);
    if (halve) t = (t + 1) >>> 1;
    clip = 1'b0;
    if (t > (W+2)'((1 << (W-1)) - 1)) begin
      clip = 1'b1;
      t = (W+2)'((1 << (W-1)) - 1);
    end else if (t < -(W+2)'(1 << (W-1))) begin
      clip = 1'b1;
      t = -(W+2)'(1 << (W-1));
    end
    return t[W-1:0];
  endfunction

  logic signed [W-1:0]        fifo_re, fifo_im;
  logic signed [W+TW_W:0]     rot_re, rot_im;
  logic signed [W:0]          rot_rnd_re, rot_rnd_im;
  logic signed [W-1:0]        sum_re, sum_im, dif_re, dif_im, twd_re, twd_im;
  logic                       c0, c1, c2, c3, c4, c5;

  assign fifo_re = dl_re[addr];
  assign fifo_im = dl_im[addr];

  cmult #(.A_W(W), .B_W(TW_W), .CONJ_B(1'b0)) u_rot (
    .a_re(fifo_re), .a_im(fifo_im), .b_re(tw_re[addr]), .b_im(tw_im[addr]),
    .p_re(rot_re), .p_im(rot_im)
  );

  always_comb begin
    logic signed [W+TW_W:0] rr, ri;
    rr = (rot_re + ((W+TW_W+1)'(1) <<< (TF - 1))) >>> TF;
    ri = (rot_im + ((W+TW_W+1)'(1) <<< (TF - 1))) >>> TF;
    rot_rnd_re = rr[W:0];
    rot_rnd_im = ri[W:0];
    twd_re = fit(rot_rnd_re, 1'b0, c4);
    twd_im = fit(rot_rnd_im, 1'b0, c5);
    sum_re = fit((W+1)'(fifo_re) + (W+1)'(in_re), shift, c0);
    sum_im = fit((W+1)'(fifo_im) + (W+1)'(in_im), shift, c1);
    dif_re = fit((W+1)'(fifo_re) - (W+1)'(in_re), shift, c2);
    dif_im = fit((W+1)'(fifo_im) - (W+1)'(in_im), shift, c3);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      ovf       <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      ovf       <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (!phase) begin
          out_valid <= primed;
          ovf       <= primed && (c4 || c5);
        end else begin
          out_valid <= 1'b1;
          primed    <= 1'b1;
          ovf       <= c0 || c1 || c2 || c3;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!phase) begin
        dl_re[addr] <= in_re;
        dl_im[addr] <= in_im;
        out_re      <= twd_re;
        out_im      <= twd_im;
      end else begin
        dl_re[addr] <= dif_re;
        dl_im[addr] <= dif_im;
        out_re      <= sum_re;
        out_im      <= sum_im;
      end
    end
  end

endmodule
