// tb_rfi_filter_top - whole design, 32 channels (64-point FFTs), 4 ADC
// samples per clock (2 output lanes of 16 channels), end to end.
//
// The "sky" is white noise in the primary antenna only.  The interference is
// two carriers plus broadband noise, seen by the reference antenna and,
// through a short linear channel, by the primary one.  The run goes through:
//   1. loop open: integrated spectra show sky + interference;
//   2. loop closed, N = 1: the interference must disappear;
//   3. N = 4 (mode switch): weights now update every fourth spectrum;
//   4. no FFT halving: the FFTs must report overflow and F saturates.
// Checks: the carrier channels fall back to near the sky level (the loop's own
// added noise allowed for, see check_clean) after convergence; the
// cleaned spectrum matches the sky-only level expected from the noise
// variance (within 30%); weight updates (cycles with any lane writing G) happen at the rate N sets; each
// mechanism (open loop, closed loop, updates, N > 1 cycles, integration
// dumps, FFT overflow, saturation) is seen at least once.
module tb_rfi_filter_top;
  localparam int unsigned NCH = 32, P = 2 * NCH, LOG2P = 6;
  localparam int unsigned L = 4, M = P / L, OL = L / 2, BW = 4;
  localparam int          K1 = 5, K2 = 19;       // carrier channels (lanes 0 and 1)
  localparam int          EPS = 26;               // epsilon = 2**-26
  localparam int          INT_LOG2 = 6;           // 64-spectrum integrations
  localparam real         PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic               adc_valid = 0;
  logic signed [7:0]  adc_prim [L], adc_ref [L];
  logic [LOG2P-1:0]   fft_shift = '1;
  logic               loop_en = 0;
  logic [3:0]         log2n = 0;
  logic [4:0]         eps_shift = 5'(EPS);
  logic [4:0]         int_log2 = 5'(INT_LOG2);
  logic               f_valid, spec_valid, spec_last;
  logic [BW-1:0]      f_bin, spec_bin;
  logic signed [17:0] f_re [OL], f_im [OL];
  logic [63:0]        spec_power [OL];
  logic               fft_ovf_prim, fft_ovf_ref, loop_active, g_update, filt_sat;

  rfi_filter_top #(.NCH(NCH), .NLANES(L)) u_dut (.*);

  // ------------------------------------------------------------ ADC streams
  int unsigned n = 0;
  function automatic int clip8(input real v);
    int i;
    i = $rtoi(v >= 0.0 ? v + 0.5 : v - 0.5);
    if (i > 127) i = 127;
    if (i < -128) i = -128;
    return i;
  endfunction

  // The primary antenna sees the reference antenna's interference through a
  // short linear channel, h = 0.6 + 0.45 z**-2, i.e. a complex gain per
  // frequency channel, which is what the filter's model assumes.
  real rfi_d1 = 0.0, rfi_d2 = 0.0;
  initial for (int l = 0; l < int'(L); l++) begin adc_prim[l] = 0; adc_ref[l] = 0; end
  always @(posedge clk) begin
    if (!rst) begin
      for (int l = 0; l < int'(L); l++) begin
        real sky, rfi, t;
        t   = real'(n + l);
        sky = real'(int'($urandom % 41) - 20);        // variance 140
        rfi = 24.0 * $cos(2.0 * PI * real'(K1) * t / real'(P))
            + 24.0 * $cos(2.0 * PI * real'(K2) * t / real'(P) + 0.7)
            + real'(int'($urandom % 97) - 48);        // broadband part
        adc_ref[l]  <= 8'(clip8(rfi));
        adc_prim[l] <= 8'(clip8(sky + 0.6 * rfi + 0.45 * rfi_d2));
        rfi_d2 = rfi_d1;
        rfi_d1 = rfi;
      end
      adc_valid <= 1'b1;
      n <= n + L;
    end
  end

  // ------------------------------------------------------------ monitors
  longint unsigned cur [NCH], last_dump [NCH];
  int dumps = 0, n_open = 0, n_closed = 0, n_upd = 0, n_ovf = 0, n_sat = 0, n_spec = 0;

  always @(posedge clk) begin
    if (!rst && spec_valid) begin
      for (int j = 0; j < int'(OL); j++) cur[int'(spec_bin) + int'(M) * j] = spec_power[j];
      if (spec_last) begin
        last_dump = cur;
        dumps++;
      end
    end
    if (!rst && f_valid && f_bin == '0) begin
      n_spec++;
      if (loop_active) n_closed++; else n_open++;
    end
    if (!rst && g_update) n_upd++;
    if (!rst && (fft_ovf_prim || fft_ovf_ref)) n_ovf++;
    if (!rst && filt_sat) n_sat++;
  end

  task automatic wait_dumps(input int k);
    int d;
    d = dumps + k;
    wait (dumps >= d);
  endtask

  // expected sky-only power per channel per integration: var * 2**18 / P * 2**INT_LOG2
  real sky_level;
  longint unsigned open_dump [NCH];

  // The loop adds noise to a channel: with a steady reference of power r and
  // b = 1 - eps*r, about (eps*r)**2 / (1 - b**2) times the sky power for N = 1
  // (0.45 for eps*r = 0.62, the carrier channels here), more since the
  // reference also carries noise, and less for N = 4.  The allowed mean
  // carrier-channel level is 2.3 (N = 1) or 1.6 (N = 4) times the sky.
  task automatic check_clean(input string what, input real lim);
    real mean, r1, r2;
    int  cnt;
    mean = 0.0; cnt = 0;
    for (int b = 1; b < int'(NCH); b++) begin
      if (b != K1 && b != K2) begin mean += real'(last_dump[b]); cnt++; end
    end
    mean = mean / real'(cnt);
    r1 = real'(open_dump[K1]) / real'(last_dump[K1]);
    r2 = real'(open_dump[K2]) / real'(last_dump[K2]);
    $display("%s: carrier suppression %0.1f dB, %0.1f dB; carrier channels %0.3f, %0.3f of sky level; other channels %0.3f",
             what, 10.0 * $log10(r1), 10.0 * $log10(r2),
             real'(last_dump[K1]) / sky_level, real'(last_dump[K2]) / sky_level, mean / sky_level);
    checks += 3;
    if (r1 < 3.0 || r2 < 3.0) begin failures++; $display("%s: carriers not removed", what); end
    if (mean < 0.7 * sky_level || mean > 1.3 * sky_level) begin failures++; $display("%s: wrong sky level", what); end
    if (real'(last_dump[K1] + last_dump[K2]) > 2.0 * lim * sky_level) begin
      failures++; $display("%s: residual carriers", what);
    end
  endtask

  initial begin
    int u0, s0;
    sky_level = 140.0 * real'(1 << 18) / real'(P) * real'(1 << INT_LOG2);
    repeat (4) @(posedge clk);
    rst = 0;
    // 1. open loop
    wait_dumps(2);
    open_dump = last_dump;
    checks++;
    if (real'(open_dump[K1]) < 5.0 * sky_level || real'(open_dump[K2]) < 5.0 * sky_level) begin failures++; $display("carrier not visible with the loop open"); end
    $display("open loop: carrier channels at %0.1f and %0.1f times the sky level",
             real'(open_dump[K1]) / sky_level, real'(open_dump[K2]) / sky_level);
    // 2. close the loop, N = 1
    loop_en = 1;
    wait_dumps(5);
    check_clean("N=1", 2.3);
    u0 = n_upd; s0 = n_spec;
    wait_dumps(1);
    checks++;
    if (n_upd - u0 < (n_spec - s0 - 1) * int'(M) || n_upd - u0 > (n_spec - s0 + 1) * int'(M)) begin
      failures++; $display("N=1: %0d updates in %0d spectra", n_upd - u0, n_spec - s0);
    end
    // 3. N = 4
    log2n = 2;
    wait_dumps(1);
    u0 = n_upd; s0 = n_spec;
    wait_dumps(2);
    checks++;
    if (n_upd - u0 < (n_spec - s0 - 4) * int'(M) / 4 || n_upd - u0 > (n_spec - s0 + 4) * int'(M) / 4) begin
      failures++; $display("N=4: %0d updates in %0d spectra", n_upd - u0, n_spec - s0);
    end
    check_clean("N=4", 1.6);
    // 4. FFT overflow
    checks += 2;
    if (n_ovf != 0) begin failures++; $display("unexpected FFT overflow"); end
    if (n_sat != 0) begin failures++; $display("unexpected filter saturation"); end
    fft_shift = '0;
    wait_dumps(1);
    $display("spectra: %0d open, %0d closed; weight updates %0d; dumps %0d; FFT overflow cycles %0d; filter saturation cycles %0d",
             n_open, n_closed, n_upd, dumps, n_ovf, n_sat);
    checks += 6;
    if (n_sat == 0)    begin failures++; $display("filter saturation never flagged"); end
    if (n_open == 0)   begin failures++; $display("loop never open"); end
    if (n_closed == 0) begin failures++; $display("loop never closed"); end
    if (n_upd == 0)    begin failures++; $display("no weight update"); end
    if (dumps == 0)    begin failures++; $display("no integration dump"); end
    if (n_ovf == 0)    begin failures++; $display("FFT overflow never flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
