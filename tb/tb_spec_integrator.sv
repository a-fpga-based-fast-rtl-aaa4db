// tb_spec_integrator - checks per-channel power integration over 2**int_log2
// spectra (1, 4 and 2 spectra, changed on the fly) with scrambled channel
// order and gaps: totals, dump timing (one cycle after the last sample) and
// the end-of-dump marker.  Samples before the first spectrum start are
// ignored.
module tb_spec_integrator;
  localparam int unsigned NCH = 8, DW = 18, PW = 64, BW = 3, IW = 5;
  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0, cycles = 0, nout = 0, ndump = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                 in_valid = 0, out_valid, out_last;
  logic [BW-1:0]        in_bin = 0, out_bin;
  logic signed [DW-1:0] in_re = 0, in_im = 0;
  logic [PW-1:0]        out_power;
  logic [IW-1:0]        int_log2 = 0;

  spec_integrator #(.NCH(NCH), .DW(DW), .PW(PW)) u_dut (.*);

  longint unsigned tot [NCH];
  longint unsigned exp_p;
  int     exp_bin;
  bit     expect_out, expect_last;

  always @(posedge clk) begin
    #3;
    checks++;
    if (out_valid != expect_out) begin failures++; $display("out_valid %0b at %0d", out_valid, cycles); end
    else if (out_valid) begin
      nout++;
      checks += 3;
      if (out_last) ndump++;
      if (int'(out_bin) != exp_bin) begin failures++; $display("bin %0d exp %0d", out_bin, exp_bin); end
      if (out_power != exp_p) begin failures++; $display("power %0d exp %0d", out_power, exp_p); end
      if (out_last != expect_last) begin failures++; $display("last %0b", out_last); end
    end
  end

  task automatic sample(input int b, input bit dump, input bit lastch, input bit count);
    int vr, vi;
    vr = int'($urandom % (1 << DW)) - (1 << (DW-1));
    vi = int'($urandom % (1 << DW)) - (1 << (DW-1));
    while ($urandom % 4 == 0) @(posedge clk) #2 expect_out = 0;
    in_valid = 1; in_bin = BW'(b); in_re = DW'(vr); in_im = DW'(vi);
    if (count) tot[b] += longint'(vr) * longint'(vr) + longint'(vi) * longint'(vi);
    @(posedge clk);
    #2;
    in_valid = 0;
    expect_out = dump; exp_bin = b; exp_p = tot[b]; expect_last = lastch;
    if (dump) tot[b] = 0;
  endtask

  initial begin
    int lens [3] = '{0, 2, 1};
    expect_out = 0;
    foreach (tot[i]) tot[i] = 0;
    repeat (3) @(posedge clk);
    #2 rst = 0;
    // partial spectrum before the first bin-0 sample: ignored
    sample(3, 0, 0, 0);
    sample(6, 0, 0, 0);
    foreach (lens[k]) begin
      int_log2 = IW'(lens[k]);
      for (int spec = 0; spec < 2 * (1 << lens[k]); spec++) begin
        for (int j = 0; j < NCH; j++)
          sample((j * 3) % NCH, (spec % (1 << lens[k])) == (1 << lens[k]) - 1, j == NCH - 1, 1);
      end
    end
    @(posedge clk) #2 expect_out = 0;
    @(posedge clk);
    checks++;
    if (ndump != 6 || nout != 6 * NCH) begin failures++; $display("dumps %0d outputs %0d", ndump, nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
