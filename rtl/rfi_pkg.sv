// rfi_pkg - shared sizes of the frequency-domain adaptive RFI canceller.
//
// The channel count (4096 spectral channels from a real 2 GSPS stream, i.e. an
// 8192-point FFT) and the user selectable quantities N (accumulation length)
// and epsilon (loop gain) follow the paper's design.  All word widths below
// are choices of this implementation: the paper does not give any of them.
// The 8-bit ADC width is that of the EV8AQ160 converter the board uses.
package rfi_pkg;

  // Spectral channels per antenna (paper: 4096 channels over 1 GHz).
  localparam int unsigned CHANNELS     = 4096;
  // Real-input FFT length that yields CHANNELS channels.
  localparam int unsigned FFT_POINTS   = 2 * CHANNELS;

  // Samples per clock per antenna.  2 GSPS (paper) over 8 lanes is a 250 MHz
  // clock (an implementation choice; the paper does not say how its FFT is
  // parallelised).
  localparam int unsigned LANES        = 8;

  // Word widths (implementation choices).
  localparam int unsigned ADC_W        = 8;   // ADC sample width
  localparam int unsigned DATA_W       = 18;  // FFT / filter data, per component
  localparam int unsigned TW_W         = 18;  // FFT twiddle factor width
  localparam int unsigned G_W          = 32;  // filter weight G, per component
  localparam int unsigned G_FRAC       = 22;  // fractional bits of G
  localparam int unsigned ACC_LOG2_MAX = 10;  // largest N is 2**ACC_LOG2_MAX
  localparam int unsigned EPS_W        = 5;   // epsilon = 2**-eps_shift, eps_shift < 32
  localparam int unsigned PWR_W        = 64;  // integrated power accumulator
  localparam int unsigned INT_LOG2_MAX = 20;  // longest integration, 2**20 spectra

  // 2**17 spectra of 8192 samples at 2 GSPS = 536.9 ms, the paper's back-end
  // integration time.
  localparam int unsigned INT_LOG2_536MS = 17;

  // Twiddle factors in integer arithmetic, so that any tool can build the
  // tables at elaboration.  Values are Q60 fixed point in 128-bit words.
  // tw_cs returns cos (sine = 0) or sin (sine = 1) of 2*pi*k/p: the angle is
  // reduced to a quadrant offset x in [0, pi/2) and the Taylor series is
  // summed to the x**27 term (truncation error below 2**-70).  Tables are
  // filled by the recurrence w[j+1] = w[j] * w[1] (tw_rot_re/tw_rot_im),
  // whose rounding error stays near 2**-50 over thousands of steps, and are
  // then rounded to TW_W bits (tw_round), matching cos/sin rounded directly.
  typedef logic signed [127:0] tw_t;
  localparam int  TW_Q       = 60;
  localparam tw_t TW_ONE     = tw_t'(1) <<< TW_Q;
  localparam tw_t TW_HALF_PI = tw_t'(64'sd1811004864519280711);  // pi/2 in Q60

  function automatic tw_t tw_cs(input longint k, input longint p, input bit sine);
    longint kk, q, r;
    tw_t    x, x2, tc, ts, c, s;
    kk = k % p;
    if (kk < 0) kk = kk + p;
    q  = (4 * kk) / p;                   // quadrant
    r  = 4 * kk - q * p;                 // offset, in units of pi/(2p)
    x  = (TW_HALF_PI * tw_t'(r)) / tw_t'(p);
    x2 = (x * x) >>> TW_Q;
    tc = TW_ONE; c = tc;
    ts = x;      s = ts;
    for (int n = 1; n <= 13; n++) begin
      tc = -((tc * x2) >>> TW_Q) / tw_t'((2 * n - 1) * (2 * n));
      ts = -((ts * x2) >>> TW_Q) / tw_t'((2 * n) * (2 * n + 1));
      c  = c + tc;
      s  = s + ts;
    end
    case (q)
      0:       return sine ? s  : c;
      1:       return sine ? c  : -s;
      2:       return sine ? -s : -c;
      default: return sine ? -c : s;
    endcase
  endfunction

  // rounding to `frac` fractional bits, halves away from zero
  function automatic longint tw_round(input tw_t v, input int frac);
    tw_t h;
    h = tw_t'(1) <<< (TW_Q - 1 - frac);
    return longint'((v >= 0) ? ((v + h) >>> (TW_Q - frac)) : -((-v + h) >>> (TW_Q - frac)));
  endfunction

endpackage
