// fft_r2sdf - streaming FFT that turns a real sample stream into CHANNELS
// complex spectral channels (the "FFT" boxes, one per antenna).
//
// A chain of LOG2P radix-2 single-path delay-feedback stages (fft_sdf_stage)
// computes a 2*NCH-point complex FFT of the real input (imaginary part 0), one
// sample per clock.  Decimation in frequency leaves the bins in bit-reversed
// order; rather than reordering them, the block labels each output with its
// bin number (out_bin) and, unless KEEP_ALL is set, drops the upper,
// mirror-image half of the spectrum, so out_valid is high on every second
// output.  With KEEP_ALL all 2*NCH bins leave (used for the lanes of the
// parallel FFT, fft_wideband_real).  The downstream blocks address
// their per-channel memories with out_bin, so the order does not matter, and
// a spectrum always starts with bin 0.
//
// shift_sched[s] halves the data in stage s (stage 0 is the input stage).
// ovf pulses when any stage saturated.  The input sample is placed with its
// MSB at bit W-2 of the W-bit datapath.  Framing: the first valid sample after
// reset is sample 0 of a spectrum; the stream must be continuous to flush out
// a spectrum (each stage holds back half a block).
//
// The paper only states that two pipelined 4096-channel FFTs are used; the
// SDF architecture, widths and scaling are choices of this implementation.
// It processes one sample per clock; fft_wideband_real runs several of them
// side by side (KEEP_ALL = 1, all 2*NCH complex outputs kept) to reach the
// paper's 2 GSPS.
module fft_r2sdf
  import rfi_pkg::*;
#(
  parameter int unsigned NCH   = CHANNELS,
  parameter int unsigned IN_W  = ADC_W,
  parameter int unsigned W     = DATA_W,
  parameter int unsigned TWW   = TW_W,
  parameter bit          KEEP_ALL = 1'b0,
  parameter int unsigned LOG2P = $clog2(2 * NCH),
  parameter int unsigned BW    = KEEP_ALL ? LOG2P : LOG2P - 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [LOG2P-1:0]       shift_sched,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_sample,
  output logic                   out_valid,
  output logic [BW-1:0]          out_bin,
  output logic signed [W-1:0]    out_re,
  output logic signed [W-1:0]    out_im,
  output logic                   ovf
);

  logic                st_v  [LOG2P+1];
  logic signed [W-1:0] st_re [LOG2P+1];
  logic signed [W-1:0] st_im [LOG2P+1];
  logic [LOG2P-1:0]    st_ovf;

  assign st_v[0]  = in_valid;
  assign st_re[0] = W'(in_sample) <<< (W - IN_W - 1);
  assign st_im[0] = '0;

  for (genvar s = 0; s < int'(LOG2P); s++) begin : g_stage
    fft_sdf_stage #(.W(W), .TW_W(TWW), .LOG2D(LOG2P - 1 - s)) u_stage (
      .clk      (clk),
      .rst      (rst),
      .shift    (shift_sched[s]),
      .in_valid (st_v[s]),
      .in_re    (st_re[s]),
      .in_im    (st_im[s]),
      .out_valid(st_v[s+1]),
      .out_re   (st_re[s+1]),
      .out_im   (st_im[s+1]),
      .ovf      (st_ovf[s])
    );
  end

  // Output index counter: natural position -> bit-reversed bin number.
  logic [LOG2P-1:0] ocnt, bin_full;

  always_comb begin
    for (int b = 0; b < int'(LOG2P); b++) bin_full[b] = ocnt[LOG2P-1-b];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ocnt      <= '0;
      out_valid <= 1'b0;
      ovf       <= 1'b0;
    end else begin
      ovf       <= |st_ovf;
      out_valid <= st_v[LOG2P] && (KEEP_ALL || !bin_full[LOG2P-1]);
      if (st_v[LOG2P]) ocnt <= ocnt + 1'b1;
    end
    out_bin <= bin_full[BW-1:0];
    out_re  <= st_re[LOG2P];
    out_im  <= st_im[LOG2P];
  end

endmodule
