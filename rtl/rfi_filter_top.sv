// rfi_filter_top - frequency-domain adaptive RFI canceller for a single-dish
// radio telescope: primary antenna (sky + RFI) and reference antenna (RFI
// only) in, RFI-free integrated spectrum out.
//
// Data path, as in the paper's block diagram:
//   adc_prim -> FFT --X-->+
//                          adaptive_filter (F = X - G R, G adapted) -> F
//   adc_ref  -> FFT --R-->+                                             |
//                                         spec_integrator (|F|^2 sum) <-+
// Each antenna delivers NLANES real samples per clock (8 at 250 MHz = the
// paper's 2 GSPS); lane l holds sample NLANES*m + l.  The parallel FFTs
// (fft_wideband_real) emit NLANES/2 channels per clock: output lane j carries
// channel k1 + M*j (M = 2*NCH/NLANES), where k1 is the lane-local channel
// number on f_bin / spec_bin.  Channels in different lanes never interact, so
// the adaptive filter and the integrator are simply replicated per output
// lane, each holding M channels.  Both FFTs share the valid strobe and
// framing, so their outputs are channel-aligned.
//
// User settings are plain input ports (on the original board they are
// host-written registers): fft_shift (halving per radix-2 level, both FFTs),
// loop_en, log2n (N = 2**log2n), eps_shift (epsilon = 2**-eps_shift) and
// int_log2 (integration of 2**int_log2 spectra; 17 gives the paper's 536 ms).
// Outputs: the filtered spectrum f_* (every spectrum, two clocks after the
// FFT output), the integrated spectrum spec_*, and status flags (OR over the
// lanes; loop_active from lane 0, all lanes switch together).
module rfi_filter_top
  import rfi_pkg::*;
#(
  parameter int unsigned NCH    = CHANNELS,
  parameter int unsigned NLANES = LANES,
  parameter int unsigned IN_W   = ADC_W,
  parameter int unsigned DW     = DATA_W,
  parameter int unsigned TWW    = TW_W,
  parameter int unsigned GW     = G_W,
  parameter int unsigned GF     = G_FRAC,
  parameter int unsigned NLMAX  = ACC_LOG2_MAX,
  parameter int unsigned EW     = EPS_W,
  parameter int unsigned PW     = PWR_W,
  parameter int unsigned ILMAX  = INT_LOG2_MAX,
  parameter int unsigned LOG2P  = $clog2(2 * NCH),
  parameter int unsigned LOG2M  = LOG2P - $clog2(NLANES),
  parameter int unsigned OL     = NLANES / 2,
  parameter int unsigned NW     = $clog2(NLMAX + 1),
  parameter int unsigned IW     = $clog2(ILMAX + 1)
) (
  input  logic                   clk,
  input  logic                   rst,
  // ADC sample streams, NLANES samples per clock
  input  logic                   adc_valid,
  input  logic signed [IN_W-1:0] adc_prim [NLANES],
  input  logic signed [IN_W-1:0] adc_ref  [NLANES],
  // user settings
  input  logic [LOG2P-1:0]       fft_shift,
  input  logic                   loop_en,
  input  logic [NW-1:0]          log2n,
  input  logic [EW-1:0]          eps_shift,
  input  logic [IW-1:0]          int_log2,
  // filtered spectrum, every spectrum; lane j is channel f_bin + M*j
  output logic                   f_valid,
  output logic [LOG2M-1:0]       f_bin,
  output logic signed [DW-1:0]   f_re [OL],
  output logic signed [DW-1:0]   f_im [OL],
  // integrated output spectrum; lane j is channel spec_bin + M*j
  output logic                   spec_valid,
  output logic [LOG2M-1:0]       spec_bin,
  output logic [PW-1:0]          spec_power [OL],
  output logic                   spec_last,
  // status
  output logic                   fft_ovf_prim,
  output logic                   fft_ovf_ref,
  output logic                   loop_active,
  output logic                   g_update,
  output logic                   filt_sat
);

  localparam int unsigned M = 1 << LOG2M;

  logic                 xp_v, xr_v;
  logic [LOG2M-1:0]     xp_bin, xr_bin;
  logic signed [DW-1:0] xp_re [OL], xp_im [OL], xr_re [OL], xr_im [OL];

  fft_wideband_real #(.NCH(NCH), .NLANES(NLANES), .IN_W(IN_W), .W(DW), .TWW(TWW)) u_fft_prim (
    .clk(clk), .rst(rst), .shift_sched(fft_shift),
    .in_valid(adc_valid), .in_samples(adc_prim),
    .out_valid(xp_v), .out_bin(xp_bin), .out_re(xp_re), .out_im(xp_im),
    .ovf(fft_ovf_prim)
  );

  fft_wideband_real #(.NCH(NCH), .NLANES(NLANES), .IN_W(IN_W), .W(DW), .TWW(TWW)) u_fft_ref (
    .clk(clk), .rst(rst), .shift_sched(fft_shift),
    .in_valid(adc_valid), .in_samples(adc_ref),
    .out_valid(xr_v), .out_bin(xr_bin), .out_re(xr_re), .out_im(xr_im),
    .ovf(fft_ovf_ref)
  );

  logic          l_fv   [OL];
  logic [LOG2M-1:0] l_fbin [OL], l_sbin [OL];
  logic          l_sv   [OL], l_slast [OL];
  logic [OL-1:0] l_act, l_upd, l_sat;

  for (genvar j = 0; j < int'(OL); j++) begin : g_lane
    adaptive_filter #(.NCH(M), .DW(DW), .GW(GW), .GF(GF), .NLMAX(NLMAX), .EW(EW)) u_filt (
      .clk(clk), .rst(rst),
      .loop_en(loop_en), .log2n(log2n), .eps_shift(eps_shift),
      .in_valid(xp_v), .in_bin(xp_bin),
      .x_re(xp_re[j]), .x_im(xp_im[j]), .r_re(xr_re[j]), .r_im(xr_im[j]),
      .f_valid(l_fv[j]), .f_bin(l_fbin[j]), .f_re(f_re[j]), .f_im(f_im[j]),
      .loop_active(l_act[j]), .g_update(l_upd[j]), .sat(l_sat[j])
    );

    spec_integrator #(.NCH(M), .DW(DW), .PW(PW), .ILMAX(ILMAX)) u_int (
      .clk(clk), .rst(rst), .int_log2(int_log2),
      .in_valid(l_fv[j]), .in_bin(l_fbin[j]), .in_re(f_re[j]), .in_im(f_im[j]),
      .out_valid(l_sv[j]), .out_bin(l_sbin[j]), .out_power(spec_power[j]),
      .out_last(l_slast[j])
    );
  end

  // All lanes run in lock step; lane 0 speaks for the strobes.
  assign f_valid     = l_fv[0];
  assign f_bin       = l_fbin[0];
  assign spec_valid  = l_sv[0];
  assign spec_bin    = l_sbin[0];
  assign spec_last   = l_slast[0];
  assign loop_active = l_act[0];
  assign g_update    = |l_upd;
  assign filt_sat    = |l_sat;

  // The two FFTs run in lock step.
  a_fft_aligned: assert property (@(posedge clk) disable iff (rst)
      (xp_v == xr_v) && (!xp_v || xp_bin == xr_bin));

endmodule
