// accum_bank - the "accum" box of the adaptive loop: one complex accumulator
// per spectral channel, summing the products F*conj(R) of N consecutive
// spectra (one accumulation cycle).
//
// Each input sample carries its channel number and two flags: in_first marks
// the first spectrum of an accumulation cycle (the accumulator restarts from
// the input), in_last the last one (the finished sum leaves on out_*).  The
// sum appears one cycle after the sample that completes it (out_valid high for
// one cycle).  The read-modify-write of a channel completes within the cycle,
// so the same channel may come back on the very next cycle.
module accum_bank
  import rfi_pkg::*;
#(
  parameter int unsigned NCH   = CHANNELS,
  parameter int unsigned IN_W  = 2*DATA_W + 1,
  parameter int unsigned ACC_W = IN_W + ACC_LOG2_MAX,
  parameter int unsigned BW    = $clog2(NCH)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic [BW-1:0]           in_bin,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_valid,
  output logic [BW-1:0]           out_bin,
  output logic signed [ACC_W-1:0] out_re,
  output logic signed [ACC_W-1:0] out_im
);

  logic signed [ACC_W-1:0] mem_re [NCH];
  logic signed [ACC_W-1:0] mem_im [NCH];
  logic signed [ACC_W-1:0] sum_re, sum_im;

  always_comb begin
    sum_re = (in_first ? '0 : mem_re[in_bin]) + ACC_W'(in_re);
    sum_im = (in_first ? '0 : mem_im[in_bin]) + ACC_W'(in_im);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem_re[in_bin] <= sum_re;
      mem_im[in_bin] <= sum_im;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
    end
    if (in_valid && in_last) begin
      out_bin <= in_bin;
      out_re  <= sum_re;
      out_im  <= sum_im;
    end
  end

endmodule
