// spec_integrator - the back-end after the filter: per-channel power
// integration of the filter output.
//
// Each sample's power |F|^2 = re^2 + im^2 is added to its channel's
// accumulator over 2**int_log2 consecutive spectra.  The paper integrates for
// 536 ms; at 2 GSPS an 8192-sample spectrum lasts 4.096 us, so that is
// 2**17 spectra (int_log2 = 17, 536.9 ms).  During the last spectrum of an
// integration each channel's total leaves on out_* (one cycle after its last
// sample, in the order the channels arrive) and the next integration starts
// afresh.  A spectrum starts at the sample whose bin is 0; the first
// integration begins at the first spectrum start after reset.  int_log2 is
// sampled at the start of each integration.  How the spectra are read out by
// the host is not described in the paper: here they simply stream out.
module spec_integrator
  import rfi_pkg::*;
#(
  parameter int unsigned NCH   = CHANNELS,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned PW    = PWR_W,
  parameter int unsigned ILMAX = INT_LOG2_MAX,
  parameter int unsigned BW    = $clog2(NCH),
  parameter int unsigned IW    = $clog2(ILMAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [IW-1:0]        int_log2,   // integrate 2**int_log2 spectra
  input  logic                 in_valid,
  input  logic [BW-1:0]        in_bin,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic [BW-1:0]        out_bin,
  output logic [PW-1:0]        out_power,
  output logic                 out_last     // with the last channel of a dump
);

  logic [PW-1:0]    mem [NCH];
  logic             started;
  logic [ILMAX-1:0] scnt, scnt0;
  logic [IW-1:0]    len, len0;
  logic [BW-1:0]    nout;
  logic             sof, first0, last0, take;
  logic [2*DW:0]    pwr;
  logic signed [2*DW-1:0] sq_re, sq_im;
  logic [PW-1:0]    sum;

  assign sof  = in_valid && (in_bin == '0);
  assign take = in_valid && (started || sof);

  always_comb begin
    scnt0 = scnt;
    len0  = len;
    if (sof) begin
      if (!started || scnt == ILMAX'((1 << len) - 1)) begin
        scnt0 = '0;
        len0  = (int_log2 > IW'(ILMAX)) ? IW'(ILMAX) : int_log2;
      end else begin
        scnt0 = scnt + 1'b1;
      end
    end
    first0 = (scnt0 == '0);
    last0  = (scnt0 == ILMAX'((1 << len0) - 1));
    sq_re  = in_re * in_re;
    sq_im  = in_im * in_im;
    pwr    = (2*DW+1)'($unsigned(sq_re)) + (2*DW+1)'($unsigned(sq_im));
    sum    = (first0 ? '0 : mem[in_bin]) + PW'(pwr);
  end

  always_ff @(posedge clk) begin
    if (take) mem[in_bin] <= sum;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      started   <= 1'b0;
      scnt      <= '0;
      len       <= '0;
      nout      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= take && last0;
      out_last  <= 1'b0;
      if (sof) begin
        started <= 1'b1;
        scnt    <= scnt0;
        len     <= len0;
      end
      if (take && last0) begin
        nout     <= (nout == BW'(NCH - 1)) ? '0 : nout + 1'b1;
        out_last <= (nout == BW'(NCH - 1));
      end
    end
    out_bin   <= in_bin;
    out_power <= sum;
  end

endmodule
