// tb_rfi_filter_full - whole design at its default size (4096 channels,
// 8192-point FFTs, 8 ADC samples per clock into 4 output lanes of 1024
// channels, every parameter at its default), end to end.
//
// The "sky" is white noise in the primary antenna only.  The interference is
// 16 carriers (a multiple-carrier signal), seen by the reference antenna and,
// through a short linear channel, by the primary one.  The run goes through:
//   1. loop open: integrated spectra show sky + carriers;
//   2. loop closed, N = 1: the carriers must disappear;
//   3. N = 4 (mode switch): weights now update every fourth spectrum;
//   4. no FFT halving: the FFTs must report overflow and F saturates.
// Integrations are 8 spectra long to keep the run short (the paper's 536 ms
// is int_log2 = 17).  Checks: the mean carrier-channel level falls back near
// the sky level (the loop adds noise, about (eps*r)**2/(1-b**2) of the sky
// power for N = 1 with b = 1 - eps*r, eps*r ~ 0.56 here, less for N = 4);
// the other channels sit within 10% of the sky level expected from the noise
// variance; updates happen at the rate N sets; each mechanism is seen.
module tb_rfi_filter_full;
  localparam int unsigned NCH = 4096, P = 2 * NCH, LOG2P = 13;
  localparam int unsigned L = 8, M = P / L, OL = L / 2, BW = 10;
  localparam int          NCAR = 16;              // carriers
  localparam int          EPS = 22;               // epsilon = 2**-22
  localparam int          INT_LOG2 = 3;           // 8-spectrum integrations
  function automatic int kc(input int c);         // carrier channels
    return 100 + 233 * c;
  endfunction
  localparam real         PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 2000000);
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

  rfi_filter_top u_dut (.*);

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
        real sky, rfi;
        sky = real'(int'($urandom % 41) - 20);        // variance 140
        rfi = 0.0;
        for (int c = 0; c < NCAR; c++)
          rfi += 6.0 * $cos(2.0 * PI * real'(kc(c)) * real'((n + l) % P) / real'(P) + 0.37 * real'(c * c));
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

  // allowed carrier-channel level: 1.8 (N = 1) or 1.4 (N = 4) times the sky
  task automatic check_clean(input string what, input real lim);
    real mean, car, car_open;
    int  cnt;
    mean = 0.0; cnt = 0; car = 0.0; car_open = 0.0;
    for (int b = 1; b < int'(NCH); b++) mean += real'(last_dump[b]);
    for (int c = 0; c < NCAR; c++) begin
      car += real'(last_dump[kc(c)]);
      car_open += real'(open_dump[kc(c)]);
      mean -= real'(last_dump[kc(c)]);
    end
    mean = mean / real'(NCH - 1 - NCAR);
    car = car / real'(NCAR);
    car_open = car_open / real'(NCAR);
    $display("%s: carrier suppression %0.1f dB; carrier channels %0.3f of sky level; other channels %0.3f",
             what, 10.0 * $log10(car_open / car), car / sky_level, mean / sky_level);
    checks += 2;
    if (mean < 0.9 * sky_level || mean > 1.1 * sky_level) begin failures++; $display("%s: wrong sky level", what); end
    if (car > lim * sky_level) begin failures++; $display("%s: residual carriers", what); end
  endtask

  initial begin
    int u0, s0;
    sky_level = 140.0 * real'(1 << 18) / real'(P) * real'(1 << INT_LOG2);
    repeat (4) @(posedge clk);
    rst = 0;
    // 1. open loop
    wait_dumps(2);
    open_dump = last_dump;
    begin
      real car_open;
      car_open = 0.0;
      for (int c = 0; c < NCAR; c++) car_open += real'(open_dump[kc(c)]) / real'(NCAR);
      checks++;
      if (car_open < 10.0 * sky_level) begin failures++; $display("carriers not visible with the loop open"); end
      $display("open loop: carrier channels at %0.1f times the sky level", car_open / sky_level);
    end
    // 2. close the loop, N = 1
    loop_en = 1;
    wait_dumps(3);
    check_clean("N=1", 1.8);
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
    check_clean("N=4", 1.4);
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
