// tb_gain_update - checks the per-channel weight memory: synchronous read,
// G <- G_old + delta with saturation, and clearing, against a model array.
module tb_gain_update;
  localparam int unsigned NCH = 16, GW = 32, BW = 4;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0, nsat = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                 rd_en = 0, wr_en = 0, wr_clear = 0, wr_sat;
  logic [BW-1:0]        rd_bin = 0, wr_bin = 0;
  logic signed [GW-1:0] rd_g_re, rd_g_im;
  logic signed [GW-1:0] wr_g_old_re = 0, wr_g_old_im = 0, wr_delta_re = 0, wr_delta_im = 0;

  gain_update #(.NCH(NCH), .GW(GW)) u_dut (.*);

  longint mre [NCH], mim [NCH];

  function automatic longint satw(input longint v, output bit c);
    longint mx;
    mx = (64'sd1 <<< (GW-1)) - 1;
    c = 0;
    if (v > mx) begin c = 1; return mx; end
    if (v < -mx-1) begin c = 1; return -mx-1; end
    return v;
  endfunction

  task automatic rd(input int b);
    rd_en = 1; rd_bin = BW'(b);
    @(posedge clk); #1;
    rd_en = 0;
    checks += 2;
    if (longint'(rd_g_re) != mre[b] || longint'(rd_g_im) != mim[b]) begin
      failures++;
      $display("bin %0d read %0d,%0d expected %0d,%0d", b, rd_g_re, rd_g_im, mre[b], mim[b]);
    end else checks += 0;
  endtask

  task automatic wr(input int b, input bit clr, input longint dre, dim);
    bit c1, c2;
    wr_en = 1; wr_clear = clr; wr_bin = BW'(b);
    wr_g_old_re = GW'(mre[b]); wr_g_old_im = GW'(mim[b]);
    wr_delta_re = GW'(dre);    wr_delta_im = GW'(dim);
    #1;
    if (clr) begin mre[b] = 0; mim[b] = 0; c1 = 0; c2 = 0; end
    else begin mre[b] = satw(mre[b] + dre, c1); mim[b] = satw(mim[b] + dim, c2); end
    checks++;
    if (wr_sat != (c1 || c2)) begin failures++; $display("wr_sat %0b", wr_sat); end
    if (c1 || c2) nsat++;
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  initial begin
    @(posedge clk); #1;
    for (int b = 0; b < NCH; b++) wr(b, 1, 0, 0);
    for (int b = 0; b < NCH; b++) rd(b);
    for (int i = 0; i < 3000; i++) begin
      int b;
      longint d1, d2;
      b  = int'($urandom % NCH);
      d1 = longint'($signed($urandom));
      d2 = longint'($signed($urandom)) >>> ($urandom % 24);
      case ($urandom % 8)
        0:       wr(b, 1, d1, d2);
        1, 2, 3: wr(b, 0, d1, d2);
        default: rd(b);
      endcase
    end
    for (int b = 0; b < NCH; b++) rd(b);
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
