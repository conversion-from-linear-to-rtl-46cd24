// tb_equalizer: self-checking test of the equalizer. Random spectra and
// weights are streamed in on consecutive clocks; the test computes
//   X' = Gx*X >> 12,   Y'' = Gy * ((R(theta) Y) >> 16) >> 12
// with its own 64-bit arithmetic, saturated to 24 bits, and checks each
// output two clocks after its input. It also checks with exact weights
// (cos = 1.0 or sin = 1.0, gain = 1.0) that Y is passed or turned by 90 deg.
module tb_equalizer;
  import polconv_pkg::*;
  localparam int CB = $clog2(NCH);

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [CB-1:0] in_ch = '0;
  logic signed [SPEC_W-1:0] in_xr = '0, in_xi = '0, in_yr = '0, in_yi = '0;
  weights_t in_w = '0;
  logic out_valid;
  logic [CB-1:0] out_ch;
  logic signed [EQ_W-1:0] out_xr, out_xi, out_yr, out_yi;

  equalizer dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, sats = 0;
  typedef struct { int ch; longint xr, xi, yr, yi; } exp_t;
  exp_t q [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic longint sat24(input longint v);
    if (v > 8388607) begin sats++; return 8388607; end
    if (v < -8388608) begin sats++; return -8388608; end
    return v;
  endfunction
  // arithmetic shift right of a signed 64-bit value
  function automatic longint asr(input longint v, input int s);
    return v >>> s;
  endfunction

  task automatic drive(input longint xr, xi, yr, yi, input longint gx, gy, cs, sn);
    exp_t e;
    longint rr, ri;
    @(posedge clk);
    in_valid <= 1; in_ch <= CB'(q.size() + checks);
    in_xr <= SPEC_W'(xr); in_xi <= SPEC_W'(xi); in_yr <= SPEC_W'(yr); in_yi <= SPEC_W'(yi);
    in_w.gxw <= GAIN_W'(gx); in_w.gyw <= GAIN_W'(gy);
    in_w.cosw <= ROT_W'(cs); in_w.sinw <= ROT_W'(sn);
    rr = asr(cs * yr - sn * yi, ROT_F);
    ri = asr(sn * yr + cs * yi, ROT_F);
    e.ch = int'(CB'(q.size() + checks));
    e.xr = sat24(asr(gx * xr, GAIN_F)); e.xi = sat24(asr(gx * xi, GAIN_F));
    e.yr = sat24(asr(gy * rr, GAIN_F)); e.yi = sat24(asr(gy * ri, GAIN_F));
    q.push_back(e);
  endtask

  int cyc = 0, in_cyc [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) in_cyc.push_back(cyc);
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int ic;
    e = q.pop_front();
    ic = in_cyc.pop_front();
    check(cyc == ic + 2, "latency 2");
    check(out_xr == e.xr && out_xi == e.xi, $sformatf("X' got %0d,%0d exp %0d,%0d", out_xr, out_xi, e.xr, e.xi));
    check(out_yr == e.yr && out_yi == e.yi, $sformatf("Y'' got %0d,%0d exp %0d,%0d", out_yr, out_yi, e.yr, e.yi));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // exact weights: identity and +90 degrees
    drive(1000, -2000, 3000, 4000, 4096, 4096, 65536, 0);
    drive(1000, -2000, 3000, 4000, 4096, 8192, 0, 65536);
    for (int n = 0; n < 2000; n++) begin
      longint a, b, c, d, gx, gy, cs, sn;
      real th;
      a = longint'($urandom_range(0, 4000000)) - 2000000;
      b = longint'($urandom_range(0, 4000000)) - 2000000;
      c = longint'($urandom_range(0, 4000000)) - 2000000;
      d = longint'($urandom_range(0, 4000000)) - 2000000;
      gx = $urandom_range(0, (n % 5 == 0) ? 262143 : 20000);
      gy = $urandom_range(0, (n % 7 == 0) ? 262143 : 20000);
      th = 6.2831853 * real'($urandom_range(0, 9999)) / 10000.0;
      cs = longint'($floor(65536.0 * $cos(th)));
      sn = longint'($floor(65536.0 * $sin(th)));
      drive(a, b, c, d, gx, gy, cs, sn);
    end
    @(posedge clk); in_valid <= 0;
    repeat (5) @(posedge clk);
    check(q.size() == 0, "all outputs seen");
    check(sats > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
