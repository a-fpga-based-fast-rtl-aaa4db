// tb_gain_scale - checks the epsilon/N scaling: delta = round(acc * 2**FRAC /
// 2**(log2n + eps_shift)), saturated to the weight width.  The expected value
// is computed in floating point (operands kept exact in 53 bits).
module tb_gain_scale;
  import rfi_pkg::*;
  localparam int unsigned ACC_W = 2*DATA_W + 1 + ACC_LOG2_MAX;
  localparam int unsigned N_W   = $clog2(ACC_LOG2_MAX + 1);
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0, nsat = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [ACC_W-1:0] acc_re, acc_im;
  logic        [N_W-1:0]   log2n;
  logic        [EPS_W-1:0] eps_shift;
  logic signed [G_W-1:0]   delta_re, delta_im;
  logic                    sat;

  gain_scale u_dut (.*);

  function automatic longint model(input longint a, input int sh, output bit clip);
    real    v;
    longint r, maxv;
    int     p;
    p = G_FRAC - sh;
    v = real'(a);
    for (int k = 0; k < p; k++) v = v * 2.0;
    for (int k = 0; k < -p; k++) v = v / 2.0;
    r = longint'($floor(v + 0.5));
    maxv = (64'sd1 <<< (G_W-1)) - 1;
    clip = 0;
    if (r > maxv) begin r = maxv; clip = 1; end
    if (r < -maxv-1) begin r = -maxv-1; clip = 1; end
    return r;
  endfunction

  task automatic check(input longint ar, ai, input int n, e);
    longint er, ei;
    bit cr, ci;
    acc_re = ACC_W'(ar); acc_im = ACC_W'(ai); log2n = N_W'(n); eps_shift = EPS_W'(e);
    @(posedge clk);
    er = model(ar, n + e, cr);
    ei = model(ai, n + e, ci);
    checks += 3;
    if (cr || ci) nsat++;
    if (longint'(delta_re) != er) begin failures++; $display("re %0d exp %0d (a=%0d sh=%0d)", delta_re, er, ar, n+e); end
    if (longint'(delta_im) != ei) begin failures++; $display("im %0d exp %0d (a=%0d sh=%0d)", delta_im, ei, ai, n+e); end
    if (sat != (cr || ci)) begin failures++; $display("sat %0b exp %0b", sat, cr || ci); end
  endtask

  initial begin
    check(1, -1, 0, 22);            // +-0.5 LSB: rounds half up
    check(3, -3, 1, 22);
    check(1000, -1000, 0, 0);       // 1000 * 2**22 overflows 32 bits
    check(-5, 5, 0, 0);
    check(123456789, -987654321, 10, 31);
    for (int i = 0; i < 3000; i++) begin
      longint ar, ai;
      ar = (longint'($urandom) <<< 8) ^ longint'($urandom & 255);
      ai = (longint'($urandom) <<< 8) ^ longint'($urandom & 255);
      ar = ar - (64'sd1 <<< 39);
      ai = ai - (64'sd1 <<< 39);
      ar = ar >>> ($urandom % 40);
      ai = ai >>> ($urandom % 40);
      check(ar, ai, int'($urandom % (ACC_LOG2_MAX + 1)), int'($urandom % 32));
    end
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
