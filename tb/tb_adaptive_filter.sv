// tb_adaptive_filter - end-to-end check of the adaptive loop on 8 channels.
//
// Stimulus per channel n and spectrum: a random noise-like reference R, an
// interference I = K_n R correlated with it and a weak "sky" term A; the
// primary is X = A + I.  Two channels carry no interference.  The run opens
// the loop, closes it with N = 1, opens it again and closes it with N = 4.
// Every filter output is compared bit for bit with a model of
//   F = X - G R,  G += eps/N * sum F conj(R),  G = 0 while the loop is open,
// written independently here (64-bit integers, its own rounding code), and
// must be on the outputs right after the second clock edge following the
// edge that takes its input.  The interference left in F must fall
// below 1% of its power once the loop has converged, in both closed phases.
module tb_adaptive_filter;
  localparam int unsigned NCH = 8, DW = 18, GW = 32, GF = 22, BW = 3, NW = 4, EW = 5;
  localparam int EPS = 18;
  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                 loop_en = 0, in_valid = 0;
  logic [NW-1:0]        log2n = 0;
  logic [EW-1:0]        eps_shift = EW'(EPS);
  logic [BW-1:0]        in_bin = 0;
  logic signed [DW-1:0] x_re = 0, x_im = 0, r_re = 0, r_im = 0;
  logic                 f_valid, loop_active, g_update, sat;
  logic [BW-1:0]        f_bin;
  logic signed [DW-1:0] f_re, f_im;

  adaptive_filter #(.NCH(NCH), .DW(DW), .GW(GW), .GF(GF)) u_dut (.*);

  // ------------------------------------------------------------ model
  longint g_re [NCH], g_im [NCH], a_re [NCH], a_im [NCH];
  bit     m_active = 0, m_started = 0;
  int     m_scnt = 0, m_n = 0, m_e = 0;
  int     n_open = 0, n_closed = 0, n_upd_model = 0, n_upd_dut = 0, n_ncycles = 0;

  function automatic longint sat_to(input longint v, input int w);
    longint mx;
    mx = (64'sd1 <<< (w-1)) - 1;
    if (v > mx) return mx;
    if (v < -mx-1) return -mx-1;
    return v;
  endfunction

  function automatic longint rshift_round(input longint v, input int sh);
    if (sh <= 0) return v;
    return (v + (64'sd1 <<< (sh-1))) >>> sh;
  endfunction

  // eps/N * acc expressed with GF fraction bits, saturated to GW bits
  function automatic longint scale_acc(input longint acc, input int s);
    longint lim;
    if (s >= GF) return sat_to(rshift_round(acc, s - GF), GW);
    lim = 64'sd1 <<< (GW - 1 - (GF - s));
    if (acc >= lim) return sat_to(64'sh7fffffffffffffff, GW);
    if (acc < -lim) return sat_to(-64'sh7fffffffffffffff, GW);
    return sat_to(acc <<< (GF - s), GW);
  endfunction

  // expected outputs, in order
  typedef struct { int bin; longint fr, fi; int cyc; } exp_t;
  exp_t q [$];

  // one input sample through the model
  task automatic model(input int b, input longint xr, xi, rr, ri, input bit en, input int ln);
    longint gr, gi, pr, pi, fr, fi;
    bit act, first, last;
    act = m_active;
    if (b == 0) begin
      act = m_active ? en : (en && m_started);
      m_started = 1;
      if (!m_active || !act || m_scnt == (1 << m_n) - 1) begin
        m_scnt = 0; m_n = ln; m_e = EPS;
        if (act && ln > 0) n_ncycles++;
      end else m_scnt++;
      m_active = act;
      if (act) n_closed++; else n_open++;
    end
    first = (m_scnt == 0);
    last  = (m_scnt == (1 << m_n) - 1);
    if (act) begin gr = g_re[b]; gi = g_im[b]; end else begin gr = 0; gi = 0; end
    fr = sat_to(xr - rshift_round(gr * rr - gi * ri, GF), DW);
    fi = sat_to(xi - rshift_round(gr * ri + gi * rr, GF), DW);
    q.push_back('{b, fr, fi, cycles});
    if (!act) begin
      g_re[b] = 0; g_im[b] = 0;
    end else begin
      pr = fr * rr + fi * ri;
      pi = fi * rr - fr * ri;
      if (first) begin a_re[b] = 0; a_im[b] = 0; end
      a_re[b] += pr; a_im[b] += pi;
      if (last) begin
        g_re[b] = sat_to(g_re[b] + scale_acc(a_re[b], m_n + m_e), GW);
        g_im[b] = sat_to(g_im[b] + scale_acc(a_im[b], m_n + m_e), GW);
        n_upd_model++;
      end
    end
  endtask

  // ------------------------------------------------------------ checker
  real resid, ipow;   // residual interference power / interference power, last spectrum
  always @(posedge clk) begin
    if (g_update) n_upd_dut++;
    if (f_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (int'(f_bin) != e.bin || longint'(f_re) != e.fr || longint'(f_im) != e.fi) begin
          failures++;
          $display("bin %0d F %0d,%0d expected bin %0d F %0d,%0d", f_bin, f_re, f_im, e.bin, e.fr, e.fi);
        end
        checks++;
        if (cycles - e.cyc != 3) begin failures++; $display("latency %0d", cycles - e.cyc); end
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  longint k_re [NCH], k_im [NCH];   // interference coupling, Q.10

  task automatic spectrum(input bit en, input int ln, input bit measure);
    for (int j = 0; j < NCH; j++) begin
      int b;
      longint rr, ri, ir, ii, ar, ai;
      b  = (j * 3) % NCH;
      rr = longint'($urandom % 1024) - 512;
      ri = longint'($urandom % 1024) - 512;
      ar = longint'($urandom % 16) - 8;
      ai = longint'($urandom % 16) - 8;
      ir = (k_re[b] * rr - k_im[b] * ri) >>> 10;
      ii = (k_re[b] * ri + k_im[b] * rr) >>> 10;
      while ($urandom % 4 == 0) @(posedge clk) #1;
      in_valid = 1; in_bin = BW'(b); loop_en = en; log2n = NW'(ln);
      x_re = DW'(ar + ir); x_im = DW'(ai + ii); r_re = DW'(rr); r_im = DW'(ri);
      model(b, ar + ir, ai + ii, rr, ri, en, ln);
      if (measure) begin
        exp_t e;
        e = q[$];
        resid += real'((e.fr - ar) * (e.fr - ar) + (e.fi - ai) * (e.fi - ai));
        ipow  += real'(ir * ir + ii * ii);
      end
      @(posedge clk) #1;
      in_valid = 0;
    end
  endtask

  task automatic check_converged(input string what);
    checks++;
    $display("%s: residual interference %f of %f (%f)", what, resid, ipow, resid / ipow);
    if (!(resid < 0.01 * ipow)) begin failures++; $display("%s: not converged", what); end
  endtask

  initial begin
    foreach (k_re[i]) begin
      k_re[i] = longint'($urandom % 2048) - 1024;
      k_im[i] = longint'($urandom % 2048) - 1024;
    end
    k_re[5] = 0; k_im[5] = 0;
    k_re[6] = 0; k_im[6] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // open loop
    for (int s = 0; s < 3; s++) spectrum(0, 0, 0);
    // closed, N = 1
    for (int s = 0; s < 20; s++) spectrum(1, 0, 0);
    resid = 0; ipow = 0;
    spectrum(1, 0, 1);
    check_converged("N=1");
    checks++;
    if (!loop_active) begin failures++; $display("loop not active"); end
    // open again: weights cleared, F = X
    for (int s = 0; s < 2; s++) spectrum(0, 2, 0);
    checks++;
    if (loop_active) begin failures++; $display("loop still active"); end
    // closed, N = 4
    for (int s = 0; s < 80; s++) spectrum(1, 2, 0);
    resid = 0; ipow = 0;
    spectrum(1, 2, 1);
    check_converged("N=4");
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks += 4;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    if (n_upd_dut != n_upd_model) begin failures++; $display("updates %0d model %0d", n_upd_dut, n_upd_model); end
    if (n_open < 5 || n_closed < 80) begin failures++; $display("open %0d closed %0d", n_open, n_closed); end
    if (n_ncycles < 20) begin failures++; $display("N=4 cycles %0d", n_ncycles); end
    $display("open spectra %0d, closed spectra %0d, weight updates %0d, N>1 cycles %0d",
             n_open, n_closed, n_upd_dut, n_ncycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
