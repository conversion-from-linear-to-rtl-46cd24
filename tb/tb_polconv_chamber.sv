// tb_polconv_chamber: the anechoic-chamber measurement, run through the
// polarization converter at its full default size (8 lanes, 1024-point
// frames, 512 channels) with eight behavioural FFT engines.
//
// The measurement: broad-band noise, linearly polarized, reaches two crossed
// dipoles whose receiver chains differ in gain and path length. The
// recorded samples (4 ms at 1000 MS/s, i.e. 3906 frames or 488 frames per
// lane) calibrate the equalizer with the noise source at 45 deg to both
// dipoles; for the source-off state the samples are set to zero signal
// (mid-scale code 512, the ADC's 0 V). The source is switched every eight
// frames, so each lane spends 244 frames in either state: the on-minus-off
// difference cancels the ADC's DC term only for equal counts. Then the linear polarization is turned
// to several angles. A correctly equalized converter gives equal LHC and RHC
// power at every angle, and the same total at every angle; any ellipticity
// left by the equalization would show up as a change with angle.
//
// Stimulus model (own): the noise is a pool of 16 frames, each a sum of
// every channel in the band with a fixed amplitude a(k) (a broad hump with
// ripples, like a measured noise spectrum) and random phases. The x chain
// has a flat gain, the y chain a gain hy(k) = 0.8 + 0.15 cos(k/25) and a
// delay of 2.5 samples plus 0.3 rad. Channel k lies on an exact FFT bin, so
// each channel's power per frame is fixed and the expected weights can be
// worked out here in floating point.
//
// Checks:
//  1. Weights: Gx and Gy within 4 % of sqrt(Pmax)/|a(k) h(k)| (the gains are
//     the inverse square root of the measured spectrum), cos/sin within 0.02
//     of cos/sin(-theta(k)), and the window open where 4|Z| exceeds max|Z|
//     by a margin and shut where it falls short by one, on both band edges.
//  2. Rotation: at each of the five positions 0, 45, 90, -45 and -90 deg
//     (those of the original measurement) the in-window LHC and
//     RHC totals agree within 2 %, and each total is within 2 % of the one at
//     0 deg. Every windowed-out channel outputs zero power.
//  3. The equalized band is flat: at 0 deg every in-window channel's LHC
//     power is within 10 % of the band mean.
// Mechanisms counted: source-on and source-off frames, channels cut below
// and above the band, zero-power outputs, angles checked.
module tb_polconv_chamber;
  import polconv_pkg::*;
  localparam int L = LANES, N = NFFT, NC = NCH, CB = $clog2(NCH);
  localparam int NP = 16;                  // noise frames in the pool
  localparam int KLO = 140, KHI = 490;     // channels carrying noise
  localparam int CAL_FRAMES = 488;         // 4 ms at 1000 MS/s, per lane
  localparam int NA = 5;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [L-1:0][SAMP_W-1:0] x_samp, y_samp;
  logic [L-1:0] fft_in_valid, fft_out_valid;
  logic [L-1:0][$clog2(N)-1:0] fft_in_idx, fft_out_idx;
  logic [L-1:0][FFT_IN_W-1:0] fft_in_re, fft_in_im;
  logic [L-1:0][FFT_OUT_W-1:0] fft_out_re, fft_out_im;
  logic cal_start = 0, diode_on = 0, params_valid;
  logic [INT_LOG2:0] int_frames = CAL_FRAMES;
  mode_t mode;
  logic [L-1:0] out_valid;
  logic [L-1:0][CB-1:0] out_ch;
  logic [L-1:0][V_W-1:0] lhc_re, lhc_im, rhc_re, rhc_im;
  logic [L-1:0][PWR_W-1:0] lhc_pwr, rhc_pwr;

  polconv_top dut (.*);

  for (genvar l = 0; l < L; l++) begin : g_fft
    fft_model #(.NFFT(N), .IN_W(FFT_IN_W), .OUT_W(FFT_OUT_W)) u_fft (
      .clk, .rst_n,
      .in_valid(fft_in_valid[l]), .in_idx(fft_in_idx[l]),
      .in_re(fft_in_re[l]), .in_im(fft_in_im[l]),
      .out_valid(fft_out_valid[l]), .out_idx(fft_out_idx[l]),
      .out_re(fft_out_re[l]), .out_im(fft_out_im[l])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- source and instrument ----------------
  localparam real PI = 3.14159265358979323846;
  real amp [NC], hy [NC], theta [NC];
  real sx [NP][N], sy [NP][N];             // x and y chain outputs, unit source
  real alpha_deg [NA] = '{0.0, 45.0, 90.0, -45.0, -90.0};

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int q10(input real v);
    int r;
    r = int'($floor(v + 0.5));
    if (r < 0) r = 0;
    if (r > 1023) r = 1023;
    return r;
  endfunction

  initial begin
    for (int k = 0; k < NC; k++) begin
      real u;
      amp[k] = 0.0;
      if (k >= KLO && k <= KHI) begin
        u = $sin(PI * real'(k - KLO) / real'(KHI - KLO));
        amp[k] = 6.0 * $sqrt(u * (1.0 + 0.3 * $sin(real'(k) / 7.0)));
      end
      hy[k]    = 0.8 + 0.15 * $cos(real'(k) / 25.0);
      theta[k] = 2.0 * PI * real'(k) * 2.5 / real'(N) + 0.3;
    end
    for (int p = 0; p < NP; p++) begin
      for (int n = 0; n < N; n++) begin sx[p][n] = 0.0; sy[p][n] = 0.0; end
      for (int k = KLO; k <= KHI; k++) begin
        real ph;
        ph = 2.0 * PI * real'($urandom_range(0, 9999)) / 10000.0;
        for (int n = 0; n < N; n++) begin
          real a;
          a = 2.0 * PI * real'((k * n) % N) / real'(N) + ph;
          sx[p][n] += amp[k] * $cos(a);
          sy[p][n] += amp[k] * hy[k] * $cos(a + theta[k]);
        end
      end
    end
  end

  // ---------------- sampler stream ----------------
  int cycle = 0;
  longint word = 0;
  bit calibrating = 1;
  real cur_alpha = 45.0;

  function automatic bit source_on(input longint g);
    return ((g / L) % 2) == 0;         // switched every L frames: equal on/off time per lane
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      longint g;
      int n0, p;
      real cx, cy;
      g  = (word * L) / N;
      n0 = int'((word * L) % N);
      p  = int'(g % NP);
      cx = $cos(cur_alpha * PI / 180.0);
      cy = $sin(cur_alpha * PI / 180.0);
      if (calibrating && !source_on(g)) begin cx = 0.0; cy = 0.0; end
      in_valid <= 1;
      for (int j = 0; j < L; j++) begin
        x_samp[j] <= SAMP_W'(q10(512.0 + cx * sx[p][n0 + j]));
        y_samp[j] <= SAMP_W'(q10(512.0 + cy * sy[p][n0 + j]));
      end
      word <= word + 1;
    end
  end

  // ---------------- source state in step with each lane's frames ----------------
  logic [L-1:0] take_frame;
  for (genvar l = 0; l < L; l++) begin : g_peek
    assign take_frame[l] = dut.g_lane[l].u_acc.take_frame;
  end
  int lane_frames [L];
  int cnt_on = 0, cnt_off = 0;
  always_comb begin
    diode_on = 1'b0;
    for (int l = 0; l < L; l++)
      if (dut.dv[l] && dut.dch[l] == '0)
        diode_on = source_on(longint'(lane_frames[l]) * L + l);
  end
  always @(posedge clk) if (rst_n)
    for (int l = 0; l < L; l++)
      if (dut.dv[l] && dut.dch[l] == '0) begin
        if (take_frame[l]) begin
          if (diode_on) cnt_on++; else cnt_off++;
        end
        lane_frames[l]++;
      end

  // ---------------- weights written ----------------
  bit w_of [NC];
  int gx_of [NC], gy_of [NC], cos_of [NC], sin_of [NC];
  always @(posedge clk) if (dut.wr_en) begin
    w_of[dut.wr_ch]   = dut.wr_w;
    gx_of[dut.wr_ch]  = int'(dut.wr_gxw);
    gy_of[dut.wr_ch]  = int'(dut.wr_gyw);
    cos_of[dut.wr_ch] = int'(dut.wr_cosw);
    sin_of[dut.wr_ch] = int'(dut.wr_sinw);
  end

  // ---------------- observation ----------------
  bit seg_on = 0;
  real sum_l [NC], sum_r [NC];
  int seg_outputs = 0, zero_ok = 0;
  always @(posedge clk) if (rst_n && seg_on)
    for (int l = 0; l < L; l++) if (out_valid[l]) begin
      int c;
      c = int'(out_ch[l]);
      seg_outputs++;
      sum_l[c] += real'(lhc_pwr[l]);
      sum_r[c] += real'(rhc_pwr[l]);
      if (c != 0 && !w_of[c]) begin
        check(lhc_pwr[l] == '0 && rhc_pwr[l] == '0, $sformatf("ch %0d outside window gives power", c));
        zero_ok++;
      end
    end

  real tot_l [NA], tot_r [NA];
  int cnt_angles = 0;
  bit flat_checked = 0;

  task automatic run_angle(input int ai);
    cur_alpha = alpha_deg[ai];
    repeat (3 * N + 200) @(posedge clk);    // flush the pipeline
    for (int c = 0; c < NC; c++) begin sum_l[c] = 0; sum_r[c] = 0; end
    seg_outputs = 0;
    seg_on = 1;
    repeat (2 * N) @(posedge clk);
    seg_on = 0;
    check(seg_outputs == 2 * NC * L, $sformatf("outputs at %0.0f deg: %0d", cur_alpha, seg_outputs));
    tot_l[ai] = 0.0; tot_r[ai] = 0.0;
    for (int c = 1; c < NC; c++)
      if (w_of[c]) begin tot_l[ai] += sum_l[c]; tot_r[ai] += sum_r[c]; end
    check(tot_r[ai] > 0.0 && tot_l[ai] / tot_r[ai] > 0.98 && tot_l[ai] / tot_r[ai] < 1.02,
          $sformatf("%0.0f deg: LHC/RHC = %f", cur_alpha, tot_l[ai] / tot_r[ai]));
    check(tot_l[ai] / tot_l[0] > 0.98 && tot_l[ai] / tot_l[0] < 1.02,
          $sformatf("%0.0f deg: LHC total / LHC at 0 deg = %f", cur_alpha, tot_l[ai] / tot_l[0]));
    $display("angle %5.1f deg: LHC/RHC = %f, total relative to 0 deg = %f",
             cur_alpha, tot_l[ai] / tot_r[ai], tot_l[ai] / tot_l[0]);
    cnt_angles++;
    if (ai == 0) begin
      real mean;
      int nin;
      mean = 0.0; nin = 0;
      for (int c = 1; c < NC; c++) if (w_of[c]) begin mean += sum_l[c]; nin++; end
      mean = mean / real'(nin);
      for (int c = 1; c < NC; c++)
        if (w_of[c])
          check(sum_l[c] > 0.9 * mean && sum_l[c] < 1.1 * mean,
                $sformatf("equalized band not flat at ch %0d: %g vs mean %g", c, sum_l[c], mean));
      flat_checked = 1;
    end
  endtask

  // ---------------- main sequence ----------------
  int cut_low = 0, cut_high = 0, win_open = 0;
  initial begin
    real pmax, zmax;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2 * N + 1000) @(posedge clk);
    @(posedge clk); cal_start <= 1;
    @(posedge clk); cal_start <= 0;
    wait (mode == MODE_COMPUTE);
    calibrating = 0;
    check(cnt_on > 0 && cnt_off > 0, $sformatf("frames on %0d off %0d", cnt_on, cnt_off));
    check(cnt_on + cnt_off == CAL_FRAMES * L, "int_frames frames per lane");
    check(cnt_on == cnt_off, "equal source-on and source-off time");
    wait (mode == MODE_OBSERVE);
    check(params_valid, "weights valid in OBSERVE");

    // expected weights
    pmax = 0.0; zmax = 0.0;
    for (int k = 1; k < NC; k++) begin
      if (amp[k] * amp[k] > pmax) pmax = amp[k] * amp[k];
      if (amp[k] * amp[k] * hy[k] * hy[k] > pmax) pmax = amp[k] * amp[k] * hy[k] * hy[k];
      if (amp[k] * amp[k] * hy[k] > zmax) zmax = amp[k] * amp[k] * hy[k];
    end
    for (int k = 1; k < NC; k++) begin
      real zr;
      zr = 4.0 * amp[k] * amp[k] * hy[k] / zmax;
      if (zr > 1.1) begin
        real egx, egy;
        egx = 4096.0 * $sqrt(pmax) / amp[k];
        egy = 4096.0 * $sqrt(pmax) / (amp[k] * hy[k]);
        win_open++;
        check(w_of[k], $sformatf("ch %0d should be in the window", k));
        check(real'(gx_of[k]) > 0.96 * egx && real'(gx_of[k]) < 1.04 * egx,
              $sformatf("Gx ch %0d = %0d exp %f", k, gx_of[k], egx));
        check(real'(gy_of[k]) > 0.96 * egy && real'(gy_of[k]) < 1.04 * egy,
              $sformatf("Gy ch %0d = %0d exp %f", k, gy_of[k], egy));
        check(rabs(real'(cos_of[k]) / 65536.0 - $cos(-theta[k])) < 0.02,
              $sformatf("cos ch %0d = %0d exp %f", k, cos_of[k], $cos(-theta[k])));
        check(rabs(real'(sin_of[k]) / 65536.0 - $sin(-theta[k])) < 0.02,
              $sformatf("sin ch %0d = %0d exp %f", k, sin_of[k], $sin(-theta[k])));
      end else if (zr < 0.9) begin
        check(!w_of[k], $sformatf("ch %0d should be outside the window", k));
        check(gx_of[k] == 0 && gy_of[k] == 0 && cos_of[k] == 0 && sin_of[k] == 0,
              $sformatf("ch %0d outside window has nonzero weights", k));
        if (!w_of[k] && k < (KLO + KHI) / 2) cut_low++;
        if (!w_of[k] && k > (KLO + KHI) / 2) cut_high++;
      end
    end
    check(w_of[0], "DC kept by the window");
    $display("window: %0d channels open, %0d cut below and %0d above the band",
             win_open, cut_low, cut_high);

    for (int a = 0; a < NA; a++) run_angle(a);

    check(cnt_on > 0, "source-on frames accumulated");
    check(cnt_off > 0, "source-off (zero signal) frames accumulated");
    check(cut_low > 0 && cut_high > 0, "window cuts both band edges");
    check(win_open > 100, "window open over the band");
    check(zero_ok > 0, "windowed-out channels seen");
    check(cnt_angles == NA && flat_checked, "all angles measured");
    $display("mechanisms: source on %0d off %0d frames, zero-power outputs %0d, angles %0d",
             cnt_on, cnt_off, zero_ok, cnt_angles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog at mode %0d", mode);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
