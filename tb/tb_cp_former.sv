// tb_cp_former: self-checking test of the circular polarization former.
// Random equalized X', Y'' stream in; the test forms LHC = X' - jY'' and
// RHC = X' + jY'' and their powers with its own arithmetic and checks them,
// with the channel number, two clocks after the input. Full-scale inputs
// check that the 51-bit powers do not overflow, and Y'' = jX' (resp. -jX')
// checks that one hand is then zero.
module tb_cp_former;
  import polconv_pkg::*;
  localparam int CB = $clog2(NCH);

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [CB-1:0] in_ch = '0;
  logic signed [EQ_W-1:0] in_xr = '0, in_xi = '0, in_yr = '0, in_yi = '0;
  logic out_valid;
  logic [CB-1:0] out_ch;
  logic signed [EQ_W:0] lhc_re, lhc_im, rhc_re, rhc_im;
  logic [PWR_W-1:0] lhc_pwr, rhc_pwr;

  cp_former dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  typedef struct { int ch; longint lr, li, rr, ri; } exp_t;
  exp_t q [$];
  int cyc = 0, in_cyc [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic drive(input longint xr, xi, yr, yi, input int ch);
    exp_t e;
    @(posedge clk);
    in_valid <= 1; in_ch <= CB'(ch);
    in_xr <= EQ_W'(xr); in_xi <= EQ_W'(xi); in_yr <= EQ_W'(yr); in_yi <= EQ_W'(yi);
    e.ch = ch;
    e.lr = xr + yi; e.li = xi - yr;     // X' - jY''
    e.rr = xr - yi; e.ri = xi + yr;     // X' + jY''
    q.push_back(e);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) in_cyc.push_back(cyc);
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    logic [PWR_W-1:0] lp, rp;
    int ic;
    e = q.pop_front();
    ic = in_cyc.pop_front();
    lp = PWR_W'(e.lr * e.lr) + PWR_W'(e.li * e.li);
    rp = PWR_W'(e.rr * e.rr) + PWR_W'(e.ri * e.ri);
    check(cyc == ic + 2, "latency 2");
    check(int'(out_ch) == e.ch, "channel");
    check(lhc_re == e.lr && lhc_im == e.li && rhc_re == e.rr && rhc_im == e.ri, "voltages");
    check(lhc_pwr == lp && rhc_pwr == rp, $sformatf("powers got %0d %0d exp %0d %0d", lhc_pwr, rhc_pwr, lp, rp));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    drive(-8388608, -8388608, 8388607, -8388608, 1);       // full scale
    drive(1000, 2000, -2000, 1000, 2);                    // Y'' = jX': LHC carries it, RHC = 0
    drive(1000, 2000, 2000, -1000, 3);                    // Y'' = -jX': LHC = 0
    for (int n = 0; n < 2000; n++)
      drive(longint'($urandom_range(0, 16777215)) - 8388608, longint'($urandom_range(0, 16777215)) - 8388608,
            longint'($urandom_range(0, 16777215)) - 8388608, longint'($urandom_range(0, 16777215)) - 8388608,
            n % NCH);
    @(posedge clk); in_valid <= 0;
    repeat (5) @(posedge clk);
    check(q.size() == 0, "all outputs seen");
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
