// tb_fft_wideband_real - checks the parallel FFT against a directly computed
// DFT: 32 channels (64 points) over 4 lanes, random 8-bit samples, first
// continuous and then with gaps.  Every output spectrum must hold each channel
// exactly once (lane j carries channel out_bin + 16*j), start with out_bin 0,
// arrive once per 16 clocks and match the DFT within 3 LSB with all levels
// halving.  Without halving and with full-scale input it must flag overflow.
module tb_fft_wideband_real;
  localparam int unsigned NCH = 32, L = 4, P = 64, M = 16, LOG2P = 6, IN_W = 8, W = 18, OL = 2;
  localparam int unsigned FRAMES = 12;
  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LOG2P-1:0]       shift_sched = '1;
  logic                   in_valid = 0, out_valid, ovf;
  logic signed [IN_W-1:0] in_samples [L];
  logic [3:0]             out_bin;
  logic signed [W-1:0]    out_re [OL], out_im [OL];

  fft_wideband_real #(.NCH(NCH), .NLANES(L), .IN_W(IN_W), .W(W)) u_dut (.*);

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  int  xin [FRAMES*P];
  int  oframe = 0, opos = 0, maxerr = 0, novf = 0;
  bit  seen [NCH];
  bit  gaps = 0, ovf_run = 0;
  int  last_sof_cycle = 0;

  always @(posedge clk) begin
    if (!rst && ovf) novf++;
    if (!rst && out_valid && !ovf_run) begin
      if (opos == 0) begin
        checks++;
        if (out_bin != 0) begin failures++; $display("spectrum does not start with bin 0"); end
        if (oframe > 1 && !gaps && cycles - last_sof_cycle != int'(M)) begin
          failures++; $display("spectrum period %0d", cycles - last_sof_cycle);
        end
        last_sof_cycle = cycles;
        foreach (seen[i]) seen[i] = 0;
      end
      for (int j = 0; j < int'(OL); j++) begin
        real er, ei, ang, scale;
        int  b;
        b = int'(out_bin) + int'(M) * j;
        checks++;
        if (seen[b]) begin failures++; $display("bin %0d twice", b); end
        seen[b] = 1;
        er = 0.0; ei = 0.0;
        scale = real'(1 << (W - IN_W - 1)) / real'(P);
        for (int n = 0; n < int'(P); n++) begin
          ang = -2.0 * 3.14159265358979 * real'(b * n) / real'(P);
          er += real'(xin[oframe*P + n]) * $cos(ang) * scale;
          ei += real'(xin[oframe*P + n]) * $sin(ang) * scale;
        end
        checks += 2;
        if (rabs(real'(out_re[j]) - er) > 3.0 || rabs(real'(out_im[j]) - ei) > 3.0) begin
          failures++;
          $display("frame %0d bin %0d got %0d,%0d exp %f,%f", oframe, b, out_re[j], out_im[j], er, ei);
        end
        if ($rtoi(rabs(real'(out_re[j]) - er)) > maxerr) maxerr = $rtoi(rabs(real'(out_re[j]) - er));
      end
      opos++;
      if (opos == int'(M)) begin opos = 0; oframe++; end
    end
  end

  initial begin
    foreach (in_samples[l]) in_samples[l] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int c = 0; c < int'(FRAMES*P/L); c++) begin
      if (c >= int'(6*P/L)) begin
        gaps = 1;
        while ($urandom % 3 == 0) begin in_valid = 0; @(posedge clk); #1; end
      end
      for (int l = 0; l < int'(L); l++) begin
        xin[c*L + l] = int'($urandom % 256) - 128;
        in_samples[l] = IN_W'(xin[c*L + l]);
      end
      in_valid = 1;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks += 2;
    if (oframe != FRAMES - 2) begin failures++; $display("frames out %0d", oframe); end
    if (novf != 0) begin failures++; $display("unexpected overflow"); end
    ovf_run = 1;
    shift_sched = '0;
    for (int c = 0; c < int'(3*P/L); c++) begin
      foreach (in_samples[l]) in_samples[l] = IN_W'(127);
      in_valid = 1;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (novf == 0) begin failures++; $display("overflow never flagged"); end
    $display("max error %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
