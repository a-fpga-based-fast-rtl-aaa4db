// adaptive_filter - the per-channel adaptive RFI canceller (the closed loop of
// the block diagram), for all channels in one time-multiplexed datapath.
//
// For every channel n it implements
//   F_{i,n}  = X_n - G_i R_n                         (X = primary = A + I)
//   G_{i+1}  = G_i + (epsilon/N) * sum_{N spectra} F_{i,j} conj(R_j),  G_0 = 0
// with X the primary-antenna spectrum and R the reference-antenna spectrum.
// N = 2**log2n spectra make one accumulation cycle; G of a channel changes
// only at the end of a cycle.
//
// Pipeline (one sample per clock, gaps allowed; same channel order in X and R):
//   c0  G[bin] read from gain_update, loop control flags computed
//   c1  G*R (cmult), rounded, subtracted from X           -> F registered
//   c2  F leaves on f_*; F*conj(R) (cmult) into accum_bank
//   c3  accumulated sum scaled by epsilon/N (gain_scale), G[bin] rewritten
// F appears 2 cycles after its input.  G[bin] is rewritten 3 cycles after
// the read, so a channel may recur no sooner than every 4 samples
// (NCH >= 4, checked by an assertion).
//
// Loop control (this implementation's choice; the paper only says that T=0 is
// when "the update loop is closed with G_0 = 0"): a spectrum starts at the
// sample whose bin is 0.  While the loop is open every weight is written to 0
// and F = X.  A request to close (loop_en) takes effect at a spectrum start,
// but only after one complete open spectrum, so that every weight has been
// cleared; opening takes effect at the next spectrum start.  log2n and
// eps_shift are sampled at the start of each accumulation cycle.
module adaptive_filter
  import rfi_pkg::*;
#(
  parameter int unsigned NCH   = CHANNELS,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned GW    = G_W,
  parameter int unsigned GF    = G_FRAC,
  parameter int unsigned NLMAX = ACC_LOG2_MAX,
  parameter int unsigned EW    = EPS_W,
  parameter int unsigned BW    = $clog2(NCH),
  parameter int unsigned NW    = $clog2(NLMAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst,
  // user settings
  input  logic                 loop_en,     // 1: close the adaptive loop
  input  logic [NW-1:0]        log2n,       // accumulation length N = 2**log2n
  input  logic [EW-1:0]        eps_shift,   // epsilon = 2**-eps_shift
  // primary and reference spectra, channel-aligned
  input  logic                 in_valid,
  input  logic [BW-1:0]        in_bin,
  input  logic signed [DW-1:0] x_re,
  input  logic signed [DW-1:0] x_im,
  input  logic signed [DW-1:0] r_re,
  input  logic signed [DW-1:0] r_im,
  // filter output F
  output logic                 f_valid,
  output logic [BW-1:0]        f_bin,
  output logic signed [DW-1:0] f_re,
  output logic signed [DW-1:0] f_im,
  // status
  output logic                 loop_active, // loop closed in the current spectrum
  output logic                 g_update,    // a weight was updated this cycle
  output logic                 sat          // F, the weight or its increment clipped
);

  localparam int unsigned PW  = 2*DW + 1;       // F*conj(R) width
  localparam int unsigned AW  = PW + NLMAX;     // accumulator width
  localparam int unsigned GRW = GW + DW + 1;    // G*R width

  // ---------------------------------------------------------------- c0
  logic          sof;
  logic          active, started;
  logic          act0;
  logic [NLMAX-1:0] scnt, scnt0;
  logic [NW-1:0] n_cur, n0;
  logic [EW-1:0] e_cur, e0;
  logic          first0, last0;

  assign sof = in_valid && (in_bin == '0);

  always_comb begin
    act0  = active;
    scnt0 = scnt;
    n0    = n_cur;
    e0    = e_cur;
    if (sof) begin
      act0 = active ? loop_en : (loop_en && started);
      if (!active || !act0 || scnt == NLMAX'((1 << n_cur) - 1)) begin
        scnt0 = '0;
        n0    = (log2n > NW'(NLMAX)) ? NW'(NLMAX) : log2n;
        e0    = eps_shift;
      end else begin
        scnt0 = scnt + 1'b1;
      end
    end
    first0 = (scnt0 == '0);
    last0  = (scnt0 == NLMAX'((1 << n0) - 1));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active  <= 1'b0;
      started <= 1'b0;
      scnt    <= '0;
      n_cur   <= '0;
      e_cur   <= '0;
    end else if (sof) begin
      // `started`: one spectrum boundary seen, so the spectrum that ends at
      // the next boundary is complete.
      started <= 1'b1;
      active  <= act0;
      scnt    <= scnt0;
      n_cur   <= n0;
      e_cur   <= e0;
    end
  end

  assign loop_active = active;

  // ---------------------------------------------------------------- c1
  typedef struct packed {
    logic                 v;
    logic [BW-1:0]        bin;
    logic                 act;
    logic                 first;
    logic                 last;
    logic [NW-1:0]        n;
    logic [EW-1:0]        e;
    logic signed [DW-1:0] x_re, x_im, r_re, r_im;
  } s1_t;

  s1_t s1;
  logic signed [GW-1:0] g_re, g_im;        // from memory, valid in c1
  logic signed [GW-1:0] g1_re, g1_im;      // masked while the loop is open

  always_ff @(posedge clk) begin
    if (rst) s1.v <= 1'b0;
    else     s1.v <= in_valid;
    s1.bin   <= in_bin;
    s1.act   <= act0;
    s1.first <= first0;
    s1.last  <= last0;
    s1.n     <= n0;
    s1.e     <= e0;
    s1.x_re  <= x_re;
    s1.x_im  <= x_im;
    s1.r_re  <= r_re;
    s1.r_im  <= r_im;
  end

  assign g1_re = s1.act ? g_re : '0;
  assign g1_im = s1.act ? g_im : '0;

  logic signed [GRW-1:0] gr_re, gr_im;
  cmult #(.A_W(GW), .B_W(DW), .CONJ_B(1'b0)) u_gr (
    .a_re(g1_re), .a_im(g1_im), .b_re(s1.r_re), .b_im(s1.r_im),
    .p_re(gr_re), .p_im(gr_im)
  );

  // F = X - round(G*R / 2**GF), saturated to DW bits
  function automatic logic signed [DW-1:0] sub_sat(
      input logic signed [DW-1:0] x, input logic signed [GRW-1:0] p, output logic clip);
    logic signed [GRW+1:0] t;
    t = (GRW+2)'(x) - (((GRW+2)'(p) + ((GRW+2)'(1) <<< (GF - 1))) >>> GF);
    clip = 1'b0;
    if (t > (GRW+2)'((1 << (DW-1)) - 1)) begin
      clip = 1'b1;
      t = (GRW+2)'((1 << (DW-1)) - 1);
    end else if (t < -(GRW+2)'(1 << (DW-1))) begin
      clip = 1'b1;
      t = -(GRW+2)'(1 << (DW-1));
    end
    return t[DW-1:0];
  endfunction

  logic signed [DW-1:0] f1_re, f1_im;
  logic                 fc_re, fc_im;
  always_comb begin
    f1_re = sub_sat(s1.x_re, gr_re, fc_re);
    f1_im = sub_sat(s1.x_im, gr_im, fc_im);
  end

  // ---------------------------------------------------------------- c2
  typedef struct packed {
    logic                 v;
    logic [BW-1:0]        bin;
    logic                 act;
    logic                 first;
    logic                 last;
    logic [NW-1:0]        n;
    logic [EW-1:0]        e;
    logic signed [GW-1:0] g_re, g_im;
    logic signed [DW-1:0] f_re, f_im, r_re, r_im;
    logic                 clip;
  } s2_t;

  s2_t s2;
  always_ff @(posedge clk) begin
    if (rst) s2.v <= 1'b0;
    else     s2.v <= s1.v;
    s2.bin   <= s1.bin;
    s2.act   <= s1.act;
    s2.first <= s1.first;
    s2.last  <= s1.last;
    s2.n     <= s1.n;
    s2.e     <= s1.e;
    s2.g_re  <= g1_re;
    s2.g_im  <= g1_im;
    s2.f_re  <= f1_re;
    s2.f_im  <= f1_im;
    s2.r_re  <= s1.r_re;
    s2.r_im  <= s1.r_im;
    s2.clip  <= s1.v && (fc_re || fc_im);
  end

  assign f_valid = s2.v;
  assign f_bin   = s2.bin;
  assign f_re    = s2.f_re;
  assign f_im    = s2.f_im;

  logic signed [PW-1:0] p_re, p_im;
  cmult #(.A_W(DW), .B_W(DW), .CONJ_B(1'b1)) u_fr (
    .a_re(s2.f_re), .a_im(s2.f_im), .b_re(s2.r_re), .b_im(s2.r_im),
    .p_re(p_re), .p_im(p_im)
  );

  logic                 acc_v;
  logic [BW-1:0]        acc_bin;
  logic signed [AW-1:0] acc_re, acc_im;
  accum_bank #(.NCH(NCH), .IN_W(PW), .ACC_W(AW)) u_acc (
    .clk(clk), .rst(rst),
    .in_valid(s2.v && s2.act), .in_bin(s2.bin),
    .in_first(s2.first), .in_last(s2.last),
    .in_re(p_re), .in_im(p_im),
    .out_valid(acc_v), .out_bin(acc_bin), .out_re(acc_re), .out_im(acc_im)
  );

  // ---------------------------------------------------------------- c3
  typedef struct packed {
    logic                 v;
    logic [BW-1:0]        bin;
    logic                 act;
    logic                 last;
    logic [NW-1:0]        n;
    logic [EW-1:0]        e;
    logic signed [GW-1:0] g_re, g_im;
  } s3_t;

  s3_t s3;
  always_ff @(posedge clk) begin
    if (rst) s3.v <= 1'b0;
    else     s3.v <= s2.v;
    s3.bin  <= s2.bin;
    s3.act  <= s2.act;
    s3.last <= s2.last;
    s3.n    <= s2.n;
    s3.e    <= s2.e;
    s3.g_re <= s2.g_re;
    s3.g_im <= s2.g_im;
  end

  logic signed [GW-1:0] d_re, d_im;
  logic                 d_sat, g_sat;
  gain_scale #(.ACC_W(AW), .OUT_W(GW), .FRAC(GF), .N_W(NW), .E_W(EW)) u_scale (
    .acc_re(acc_re), .acc_im(acc_im), .log2n(s3.n), .eps_shift(s3.e),
    .delta_re(d_re), .delta_im(d_im), .sat(d_sat)
  );

  logic wr_en;
  assign wr_en    = s3.v && (!s3.act || s3.last);
  assign g_update = s3.v && s3.act && s3.last;

  gain_update #(.NCH(NCH), .GW(GW)) u_g (
    .clk(clk),
    .rd_en(in_valid), .rd_bin(in_bin), .rd_g_re(g_re), .rd_g_im(g_im),
    .wr_en(wr_en), .wr_clear(!s3.act), .wr_bin(s3.bin),
    .wr_g_old_re(s3.g_re), .wr_g_old_im(s3.g_im),
    .wr_delta_re(d_re), .wr_delta_im(d_im),
    .wr_sat(g_sat)
  );

  assign sat = s2.clip || (g_update && d_sat) || g_sat;

  // The accumulator and the pipeline must agree on which channel is updated.
  a_acc_aligned: assert property (@(posedge clk) disable iff (rst)
      g_update |-> (acc_v && acc_bin == s3.bin));

  initial begin
    if (NCH < 4) $error("adaptive_filter: NCH must be at least 4");
  end

endmodule
