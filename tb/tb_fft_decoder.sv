// tb_fft_decoder: self-checking test of the two-real-FFT decoder at full size
// (1024 bins). Random integer spectra X and Y with the Hermitian symmetry of
// real signals are combined into Z = X + jY and fed in a scrambled bin
// order; the decoder must return X[k] and Y[k] for k = 0..511 exactly,
// starting two clocks after the last bin and one channel per clock.
module tb_fft_decoder;
  import polconv_pkg::*;
  localparam int N = NFFT, NC = N / 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [$clog2(N)-1:0] in_idx = '0;
  logic signed [FFT_OUT_W-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic [$clog2(NC)-1:0] out_ch;
  logic signed [SPEC_W-1:0] out_xr, out_xi, out_yr, out_yi;

  fft_decoder dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int xr [N], xi [N], yr [N], yi [N];       // current frame's true spectra
  int exp_xr [$], exp_xi [$], exp_yr [$], exp_yi [$];
  int cycle = 0, last_bin_cycle [$], first_out_cycle;
  int expect_ch = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic void make_spectra();
    for (int k = 0; k <= N / 2; k++) begin
      xr[k] = $urandom_range(0, 200000) - 100000;
      yr[k] = $urandom_range(0, 200000) - 100000;
      xi[k] = (k == 0 || k == N / 2) ? 0 : $urandom_range(0, 200000) - 100000;
      yi[k] = (k == 0 || k == N / 2) ? 0 : $urandom_range(0, 200000) - 100000;
    end
    for (int k = N / 2 + 1; k < N; k++) begin
      xr[k] = xr[N - k]; xi[k] = -xi[N - k];
      yr[k] = yr[N - k]; yi[k] = -yi[N - k];
    end
    for (int k = 0; k < NC; k++) begin
      exp_xr.push_back(xr[k]); exp_xi.push_back(xi[k]);
      exp_yr.push_back(yr[k]); exp_yi.push_back(yi[k]);
    end
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    check(exp_xr.size() > 0, "unexpected output");
    if (exp_xr.size() > 0) begin
      int a, b, c, d;
      a = exp_xr.pop_front(); b = exp_xi.pop_front();
      c = exp_yr.pop_front(); d = exp_yi.pop_front();
      check(out_ch == expect_ch, $sformatf("channel %0d expected %0d", out_ch, expect_ch));
      check(out_xr == a && out_xi == b, $sformatf("ch %0d X got %0d,%0d exp %0d,%0d", out_ch, out_xr, out_xi, a, b));
      check(out_yr == c && out_yi == d, $sformatf("ch %0d Y got %0d,%0d exp %0d,%0d", out_ch, out_yr, out_yi, c, d));
      if (expect_ch == 0) begin
        int lb;
        lb = last_bin_cycle.pop_front();
        check(cycle == lb + 2, $sformatf("latency %0d", cycle - lb));
        first_out_cycle = cycle;
      end else begin
        check(cycle == first_out_cycle + expect_ch, "one channel per clock");
      end
      expect_ch = (expect_ch + 1) % NC;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 4; f++) begin
      make_spectra();
      for (int n = 0; n < N; n++) begin
        int k;
        // scrambled order, bin N-1 last
        k = (n == N - 1) ? N - 1 : (n * 37) % (N - 1);
        @(posedge clk);
        in_valid <= 1;
        in_idx   <= $clog2(N)'(k);
        in_re    <= FFT_OUT_W'(xr[k] - yi[k]);   // Z = X + jY
        in_im    <= FFT_OUT_W'(xi[k] + yr[k]);
        if (k == N - 1) last_bin_cycle.push_back(cycle + 1);
      end
    end
    @(posedge clk);
    in_valid <= 0;
    repeat (NC + 10) @(posedge clk);
    check(exp_xr.size() == 0, "all channels delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
