// tb_accum_bank - checks per-channel accumulation over N spectra (N = 1, 2
// and 8) with channels arriving in a scrambled order and with gaps, against a
// model; also checks the one-cycle output latency.
module tb_accum_bank;
  localparam int unsigned NCH = 8, IN_W = 37, ACC_W = 47, BW = 3;
  logic clk = 0, rst = 1;
  int   checks = 0, failures = 0, cycles = 0, nout = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                    in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic [BW-1:0]           in_bin = 0, out_bin;
  logic signed [IN_W-1:0]  in_re = 0, in_im = 0;
  logic signed [ACC_W-1:0] out_re, out_im;

  accum_bank #(.NCH(NCH), .IN_W(IN_W), .ACC_W(ACC_W)) u_dut (.*);

  longint sre [NCH], sim [NCH];
  longint exp_re, exp_im;
  int     exp_bin;
  bit     expect_out;

  always @(posedge clk) begin
    #3;
    checks++;
    if (out_valid != expect_out) begin failures++; $display("out_valid %0b at %0d", out_valid, cycles); end
    else if (out_valid) begin
      nout++;
      checks += 2;
      if (int'(out_bin) != exp_bin) begin failures++; $display("bin %0d exp %0d", out_bin, exp_bin); end
      if (longint'(out_re) != exp_re || longint'(out_im) != exp_im) begin
        failures++; $display("sum %0d,%0d exp %0d,%0d", out_re, out_im, exp_re, exp_im);
      end
    end
  end

  initial begin
    expect_out = 0;
    repeat (3) @(posedge clk);
    #2 rst = 0;
    foreach (sre[i]) begin sre[i] = 0; sim[i] = 0; end
    for (int n_log = 0; n_log <= 3; n_log += (n_log == 1 ? 2 : 1)) begin
      for (int spec = 0; spec < 4 * (1 << n_log); spec++) begin
        for (int j = 0; j < NCH; j++) begin
          int b;
          longint vr, vi;
          bit f, l;
          b  = (j * 5) % NCH;
          vr = longint'($signed($urandom)) <<< 4;
          vi = longint'($signed($urandom)) <<< 4;
          f  = (spec % (1 << n_log)) == 0;
          l  = (spec % (1 << n_log)) == (1 << n_log) - 1;
          while ($urandom % 4 == 0) @(posedge clk) #2 expect_out = 0;
          in_valid = 1; in_bin = BW'(b); in_first = f; in_last = l;
          in_re = IN_W'(vr); in_im = IN_W'(vi);
          if (f) begin sre[b] = 0; sim[b] = 0; end
          sre[b] += vr; sim[b] += vi;
          @(posedge clk);
          #2;
          in_valid = 0;
          expect_out = l; exp_bin = b; exp_re = sre[b]; exp_im = sim[b];
        end
      end
    end
    @(posedge clk) #2 expect_out = 0;
    @(posedge clk);
    if (nout != 4 * NCH * 3) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
