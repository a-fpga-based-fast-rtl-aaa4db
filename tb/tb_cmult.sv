// tb_cmult - checks the complex multiplier, plain and conjugating, against
// products computed with 64-bit integers, on corner values and random operands.
module tb_cmult;
  localparam int unsigned AW = 18, BW = 25;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [AW-1:0]    a_re, a_im;
  logic signed [BW-1:0]    b_re, b_im;
  logic signed [AW+BW:0]   p_re, p_im, q_re, q_im;

  cmult #(.A_W(AW), .B_W(BW), .CONJ_B(1'b0)) u_p (.*, .p_re(p_re), .p_im(p_im));
  cmult #(.A_W(AW), .B_W(BW), .CONJ_B(1'b1)) u_q (.*, .p_re(q_re), .p_im(q_im));

  task automatic check(input longint ar, ai, br, bi);
    longint er, ei, cr, ci;
    a_re = AW'(ar); a_im = AW'(ai); b_re = BW'(br); b_im = BW'(bi);
    @(posedge clk);
    er = ar*br - ai*bi;  ei = ar*bi + ai*br;
    cr = ar*br + ai*bi;  ci = ai*br - ar*bi;
    checks += 4;
    if (longint'(p_re) != er) begin failures++; $display("p_re %0d exp %0d", p_re, er); end
    if (longint'(p_im) != ei) begin failures++; $display("p_im %0d exp %0d", p_im, ei); end
    if (longint'(q_re) != cr) begin failures++; $display("q_re %0d exp %0d", q_re, cr); end
    if (longint'(q_im) != ci) begin failures++; $display("q_im %0d exp %0d", q_im, ci); end
  endtask

  function automatic longint rnd(int unsigned w);
    longint v;
    v = longint'($urandom) & ((64'sd1 <<< w) - 1);
    return v - (64'sd1 <<< (w-1));
  endfunction

  initial begin
    longint amin, bmin;
    amin = -(64'sd1 <<< (AW-1));
    bmin = -(64'sd1 <<< (BW-1));
    check(3, -2, 5, 7);
    check(amin, amin, bmin, bmin);
    check(-amin-1, amin, bmin, -bmin-1);
    check(0, 1, 0, 1);
    for (int i = 0; i < 2000; i++) check(rnd(AW), rnd(AW), rnd(BW), rnd(BW));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
