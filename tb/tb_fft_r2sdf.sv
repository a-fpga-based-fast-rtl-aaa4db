// tb_fft_r2sdf - checks the streaming FFT against a directly computed DFT.
//
// A 64-point FFT (32 channels) is fed random 8-bit samples, continuously and
// then with gaps.  Every output spectrum must carry each channel exactly once,
// start with bin 0, and match the DFT of its input frame within 3 LSB when all
// stages halve.  A second run with no halving and full-scale input must raise
// the overflow flag.  Also checked: one spectrum per 64 input samples.
module tb_fft_r2sdf;
  localparam int unsigned NCH = 32, P = 64, LOG2P = 6, IN_W = 8, W = 18, BW = 5;
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

  logic [LOG2P-1:0]      shift_sched = '1;
  logic                  in_valid = 0, out_valid, ovf;
  logic signed [IN_W-1:0] in_sample = 0;
  logic [BW-1:0]         out_bin;
  logic signed [W-1:0]   out_re, out_im;

  fft_r2sdf #(.NCH(NCH), .IN_W(IN_W), .W(W)) u_dut (.*);

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  int  xin [FRAMES*P];
  int  nin = 0;
  int  oframe = 0, opos = 0, maxerr = 0, novf = 0;
  bit  seen [NCH];
  bit  gaps = 0, ovf_run = 0;
  int  first_out_cycle = -1, last_sof_cycle = 0, sof_period = 0;

  always @(posedge clk) begin
    if (ovf) novf++;
    if (!rst && out_valid && !ovf_run) begin
      real er, ei, ang, scale;
      int  b;
      b = int'(out_bin);
      if (opos == 0) begin
        checks++;
        if (b != 0) begin failures++; $display("spectrum does not start with bin 0"); end
        if (oframe > 0 && !gaps) begin
          if (oframe > 1 && cycles - last_sof_cycle != P) begin
            failures++; $display("spectrum period %0d", cycles - last_sof_cycle);
          end
        end
        last_sof_cycle = cycles;
        foreach (seen[i]) seen[i] = 0;
      end
      checks++;
      if (seen[b]) begin failures++; $display("bin %0d twice", b); end
      seen[b] = 1;
      er = 0.0; ei = 0.0;
      scale = real'(1 << (W - IN_W - 1)) / real'(P);
      for (int n = 0; n < P; n++) begin
        ang = -2.0 * 3.14159265358979 * real'(b * n) / real'(P);
        er += real'(xin[oframe*P + n]) * $cos(ang) * scale;
        ei += real'(xin[oframe*P + n]) * $sin(ang) * scale;
      end
      checks += 2;
      if (rabs(real'(out_re) - er) > 3.0 || rabs(real'(out_im) - ei) > 3.0) begin
        failures++;
        $display("frame %0d bin %0d got %0d,%0d exp %f,%f", oframe, b, out_re, out_im, er, ei);
      end
      if ($rtoi(rabs(real'(out_re) - er)) > maxerr) maxerr = $rtoi(rabs(real'(out_re) - er));
      opos++;
      if (opos == NCH) begin opos = 0; oframe++; end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < FRAMES*P; i++) begin
      if (i >= 6*P) begin
        gaps = 1;
        while ($urandom % 3 == 0) begin in_valid = 0; @(posedge clk); #1; end
      end
      xin[i] = int'($urandom % 256) - 128;
      in_valid = 1; in_sample = IN_W'(xin[i]);
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (oframe != FRAMES - 2) begin failures++; $display("frames out %0d", oframe); end
    checks++;
    if (novf != 0) begin failures++; $display("unexpected overflow"); end
    // no halving and full-scale DC: must saturate and flag it
    ovf_run = 1;
    shift_sched = '0;
    for (int i = 0; i < 3*P; i++) begin
      in_valid = 1; in_sample = IN_W'(127);
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
