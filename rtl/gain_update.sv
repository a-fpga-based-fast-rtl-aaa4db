// gain_update - the "+" and "update" boxes of the adaptive loop: one complex
// filter weight G per spectral channel.
//
// Read port: rd_en/rd_bin at cycle t gives G[rd_bin] on rd_g_* at cycle t+1
// (synchronous read, block-RAM style).
// Write port: when wr_en is high, G[wr_bin] becomes wr_g_old + wr_delta
// (saturating), i.e. G_{i+1} = G_i + epsilon/N * sum, or 0 when wr_clear is
// set.  The caller passes the old weight it read earlier (G_i does not change
// during an accumulation cycle, as in the paper), so the memory needs one read
// and one write port only.  Clearing channel by channel is how G_0 = 0 is
// established: a reset cannot clear a memory at once.
module gain_update
  import rfi_pkg::*;
#(
  parameter int unsigned NCH = CHANNELS,
  parameter int unsigned GW  = G_W,
  parameter int unsigned BW  = $clog2(NCH)
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [BW-1:0]        rd_bin,
  output logic signed [GW-1:0] rd_g_re,
  output logic signed [GW-1:0] rd_g_im,
  input  logic                 wr_en,
  input  logic                 wr_clear,
  input  logic [BW-1:0]        wr_bin,
  input  logic signed [GW-1:0] wr_g_old_re,
  input  logic signed [GW-1:0] wr_g_old_im,
  input  logic signed [GW-1:0] wr_delta_re,
  input  logic signed [GW-1:0] wr_delta_im,
  output logic                 wr_sat       // the sum was clipped
);

  logic signed [GW-1:0] mem_re [NCH];
  logic signed [GW-1:0] mem_im [NCH];

  function automatic logic signed [GW-1:0] sat_add(
      input logic signed [GW-1:0] a, input logic signed [GW-1:0] b, output logic clip);
    logic signed [GW:0] s;
    s = (GW+1)'(a) + (GW+1)'(b);
    clip = (s[GW] != s[GW-1]);
    if (!clip) return s[GW-1:0];
    return s[GW] ? {1'b1, {(GW-1){1'b0}}} : {1'b0, {(GW-1){1'b1}}};
  endfunction

  logic signed [GW-1:0] new_re, new_im;
  logic                 c_re, c_im;

  always_comb begin
    new_re = sat_add(wr_g_old_re, wr_delta_re, c_re);
    new_im = sat_add(wr_g_old_im, wr_delta_im, c_im);
    wr_sat = wr_en && !wr_clear && (c_re || c_im);
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_g_re <= mem_re[rd_bin];
      rd_g_im <= mem_im[rd_bin];
    end
    if (wr_en) begin
      mem_re[wr_bin] <= wr_clear ? '0 : new_re;
      mem_im[wr_bin] <= wr_clear ? '0 : new_im;
    end
  end

endmodule
