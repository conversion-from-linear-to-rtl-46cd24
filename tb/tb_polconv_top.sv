// tb_polconv_top: end-to-end test of the polarization converter with every
// parameter at its default (8 lanes, 1024-point frames, 512 channels).
// Eight behavioural FFT engines close the loop between the converter's FFT
// ports.
//
// Stimulus: 12 tones at exact channel frequencies stand for the noise
// diode. The y chain sees them with gain 0.7 and a channel-dependent phase
// offset theta_k (the "instrument"). An interfering tone at channel 300 is
// present with the diode on and off alike. The diode is switched every 16
// input frames and diode_on is presented to the converter in step with the
// frames it applies to.
//
// Sequence and checks:
//  1. Calibration over 8 frames per lane (both diode states used); the
//     weights written must show Gx ~ 1, Gy ~ 1/0.7, cos/sin of -theta_k in
//     the tone channels, window 1 there and at DC, window 0 at the
//     interferer (removed by on-minus-off) and everywhere else.
//  2. Observation of a circularly polarized input (y = x turned by +90 deg
//     in front of the instrument): LHC must exceed RHC by 30 dB in every
//     tone channel, and every windowed-out channel must give zero power.
//  3. The opposite hand (-90 deg): RHC must dominate by 30 dB.
//  4. A 45 deg linear input: LHC and RHC within 5 %.
// Each mechanism (both accumulator banks, window cut, DC delta,
// interferer cancelled, all mode changes, all lanes streaming, both decoder
// banks, hand switch) is counted and must occur.
module tb_polconv_top;
  import polconv_pkg::*;
  localparam int L = LANES, N = NFFT, NC = NCH, CB = $clog2(NCH);
  localparam int NT = 12;
  localparam int RFI = 300;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [L-1:0][SAMP_W-1:0] x_samp, y_samp;
  logic [L-1:0] fft_in_valid, fft_out_valid;
  logic [L-1:0][$clog2(N)-1:0] fft_in_idx, fft_out_idx;
  logic [L-1:0][FFT_IN_W-1:0] fft_in_re, fft_in_im;
  logic [L-1:0][FFT_OUT_W-1:0] fft_out_re, fft_out_im;
  logic cal_start = 0, diode_on = 0, params_valid;
  logic [INT_LOG2:0] int_frames = 8;
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

  // ---------------- stimulus tables (one frame period) ----------------
  typedef enum int { SIG_CAL_ON, SIG_CAL_OFF, SIG_CIRC_P, SIG_CIRC_M, SIG_LIN } sig_t;
  localparam real PI = 3.14159265358979323846;
  int tone_k [NT];
  real tone_ph [NT], theta [NT];
  int xt [5][N], yt [5][N];
  bit is_tone [NC];

  function automatic int q10(input real v);
    int r;
    r = int'($floor(v + 0.5));
    if (r < 0) r = 0;
    if (r > 1023) r = 1023;
    return r;
  endfunction

  initial begin
    for (int i = 0; i < NT; i++) begin
      tone_k[i]  = 40 + 35 * i;
      tone_ph[i] = 2.0 * PI * real'($urandom_range(0, 999)) / 1000.0;
      theta[i]   = 0.4 + 0.004 * real'(tone_k[i]);
      is_tone[tone_k[i]] = 1;
    end
    for (int s = 0; s < 5; s++)
      for (int n = 0; n < N; n++) begin
        real vx, vy, extra, rf_x, rf_y;
        vx = 512.0; vy = 512.0;
        extra = (s == SIG_CIRC_P) ? PI / 2 : (s == SIG_CIRC_M) ? -PI / 2 : 0.0;
        if (s != SIG_CAL_OFF)
          for (int i = 0; i < NT; i++) begin
            real a;
            a = 2.0 * PI * real'(tone_k[i] * n) / real'(N) + tone_ph[i];
            vx += 25.0 * $cos(a);
            vy += 0.7 * 25.0 * $cos(a + extra + theta[i]);
          end
        rf_x = 40.0 * $cos(2.0 * PI * real'(RFI * n) / real'(N));
        rf_y = 40.0 * $cos(2.0 * PI * real'(RFI * n) / real'(N) + 1.0);
        if (s == SIG_CAL_ON || s == SIG_CAL_OFF) begin vx += rf_x; vy += rf_y; end
        xt[s][n] = q10(vx);
        yt[s][n] = q10(vy);
      end
  end

  // ---------------- sampler stream ----------------
  int cycle = 0;
  longint word = 0;          // words of L samples sent
  sig_t obs_sig = SIG_CIRC_P;
  bit   calibrating = 1;

  function automatic bit diode_of_frame(input longint g);
    return ((g / 16) % 2) == 0;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      longint g;
      int n0;
      sig_t s;
      g  = (word * L) / N;
      n0 = int'((word * L) % N);
      s  = calibrating ? (diode_of_frame(g) ? SIG_CAL_ON : SIG_CAL_OFF) : obs_sig;
      in_valid <= 1;
      for (int j = 0; j < L; j++) begin
        x_samp[j] <= SAMP_W'(xt[s][n0 + j]);
        y_samp[j] <= SAMP_W'(yt[s][n0 + j]);
      end
      word <= word + 1;
    end
  end

  // per-lane internals observed by the test
  logic [L-1:0] take_frame, dec_wbank;
  for (genvar l = 0; l < L; l++) begin : g_peek
    assign take_frame[l] = dut.g_lane[l].u_acc.take_frame;
    assign dec_wbank[l]  = dut.g_lane[l].u_dec.wbank;
  end

  // ---------------- diode state in step with each lane's frames ----------------
  int lane_frames [L];
  int cnt_on = 0, cnt_off = 0;
  always_comb begin
    diode_on = 1'b0;
    for (int l = 0; l < L; l++)
      if (dut.dv[l] && dut.dch[l] == '0)
        diode_on = diode_of_frame(longint'(lane_frames[l]) * L + l);
  end
  always @(posedge clk) if (rst_n)
    for (int l = 0; l < L; l++)
      if (dut.dv[l] && dut.dch[l] == '0) begin
        if (take_frame[l]) begin
          if (diode_on) cnt_on++; else cnt_off++;
        end
        lane_frames[l]++;
      end

  // ---------------- mechanism counters ----------------
  int cnt_dec_bank [2];
  int cnt_lane_stream [L];
  int cnt_accum = 0, cnt_compute = 0, cnt_observe = 0;
  mode_t last_mode = MODE_IDLE;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < L; l++) begin
      if (fft_in_valid[l]) cnt_lane_stream[l]++;
      if (fft_out_valid[l] && fft_out_idx[l] == '1) cnt_dec_bank[dec_wbank[l]]++;
    end
    if (mode != last_mode) begin
      if (mode == MODE_ACCUM) cnt_accum++;
      if (mode == MODE_COMPUTE) cnt_compute++;
      if (mode == MODE_OBSERVE) cnt_observe++;
    end
    last_mode <= mode;
  end

  // ---------------- weights written during calibration ----------------
  bit w_of [NC];
  int gx_of [NC], gy_of [NC], cos_of [NC], sin_of [NC];
  always @(posedge clk) if (dut.wr_en) begin
    w_of[dut.wr_ch]   = dut.wr_w;
    gx_of[dut.wr_ch]  = int'(dut.wr_gxw);
    gy_of[dut.wr_ch]  = int'(dut.wr_gyw);
    cos_of[dut.wr_ch] = int'(dut.wr_cosw);
    sin_of[dut.wr_ch] = int'(dut.wr_sinw);
  end

  // ---------------- observation checks ----------------
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
      if (!is_tone[c] && c != 0 && !w_of[c]) begin
        check(lhc_pwr[l] == '0 && rhc_pwr[l] == '0, $sformatf("ch %0d outside window gives power", c));
        zero_ok++;
      end
    end

  int cnt_hand_l = 0, cnt_hand_r = 0, cnt_lin = 0;
  task automatic run_segment(input sig_t s, input int expect_hand);
    // expect_hand: 1 = LHC dominant, -1 = RHC dominant, 0 = equal
    obs_sig = s;
    repeat (3 * N + 200) @(posedge clk);    // flush the pipeline
    for (int c = 0; c < NC; c++) begin sum_l[c] = 0; sum_r[c] = 0; end
    seg_outputs = 0;
    seg_on = 1;
    repeat (2 * N) @(posedge clk);
    seg_on = 0;
    check(seg_outputs >= 2 * NC * L - NC * L / 2, $sformatf("outputs in segment: %0d", seg_outputs));
    for (int i = 0; i < NT; i++) begin
      int c;
      real ratio;
      c = tone_k[i];
      ratio = (sum_r[c] > 0.0) ? sum_l[c] / sum_r[c] : 1.0e30;
      if (expect_hand == 1) begin
        check(ratio > 1000.0, $sformatf("LHC/RHC in ch %0d = %g", c, ratio));
        if (ratio > 1000.0) cnt_hand_l++;
      end else if (expect_hand == -1) begin
        check(ratio < 0.001, $sformatf("LHC/RHC in ch %0d = %g", c, ratio));
        if (ratio < 0.001) cnt_hand_r++;
      end else begin
        check(ratio > 0.95 && ratio < 1.05, $sformatf("linear: LHC/RHC in ch %0d = %g", c, ratio));
        cnt_lin++;
      end
    end
  endtask

  // ---------------- main sequence ----------------
  int t_compute0, t_observe0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2 * N + 1000) @(posedge clk);
    @(posedge clk); cal_start <= 1;
    @(posedge clk); cal_start <= 0;
    wait (mode == MODE_COMPUTE);
    t_compute0 = cycle;
    calibrating = 0;                       // the input now carries the circular source
    check(cnt_on > 0 && cnt_off > 0, $sformatf("frames on %0d off %0d", cnt_on, cnt_off));
    check(cnt_on + cnt_off == 8 * L, "int_frames frames per lane");
    wait (mode == MODE_OBSERVE);
    t_observe0 = cycle;
    check(params_valid, "weights valid in OBSERVE");
    $display("weights computed in %0d clocks", t_observe0 - t_compute0);

    // calibration results
    for (int i = 0; i < NT; i++) begin
      int c;
      real ec, es;
      c = tone_k[i];
      ec = 65536.0 * $cos(-theta[i]);
      es = 65536.0 * $sin(-theta[i]);
      check(w_of[c], $sformatf("tone ch %0d in window", c));
      check(gx_of[c] > 4096 * 0.97 && gx_of[c] < 4096 * 1.03, $sformatf("Gx ch %0d = %0d", c, gx_of[c]));
      check(gy_of[c] > 4096 / 0.7 * 0.97 && gy_of[c] < 4096 / 0.7 * 1.03, $sformatf("Gy ch %0d = %0d", c, gy_of[c]));
      check(real'(cos_of[c]) - ec < 200.0 && ec - real'(cos_of[c]) < 200.0, $sformatf("cos ch %0d = %0d exp %f", c, cos_of[c], ec));
      check(real'(sin_of[c]) - es < 200.0 && es - real'(sin_of[c]) < 200.0, $sformatf("sin ch %0d = %0d exp %f", c, sin_of[c], es));
    end
    check(w_of[0], "DC kept by the window");
    check(!w_of[RFI], "interferer removed by on - off and cut by the window");
    for (int c = 1; c < NC; c++)
      if (!is_tone[c]) check(!w_of[c], $sformatf("ch %0d outside window", c));

    run_segment(SIG_CIRC_P, 1);
    run_segment(SIG_CIRC_M, -1);
    run_segment(SIG_LIN, 0);

    // mechanisms
    check(cnt_on > 0, "diode-on bank used");
    check(cnt_off > 0, "diode-off bank used");
    check(cnt_accum == 1 && cnt_compute == 1 && cnt_observe == 1, "mode sequence");
    check(cnt_dec_bank[0] > 0 && cnt_dec_bank[1] > 0, "both decoder buffer halves");
    for (int l = 0; l < L; l++) check(cnt_lane_stream[l] > 0, $sformatf("lane %0d streamed", l));
    check(zero_ok > 0, "windowed-out channels seen");
    check(cnt_hand_l == NT && cnt_hand_r == NT && cnt_lin == NT, "both hands and linear");
    $display("mechanisms: diode on %0d off %0d frames, decoder halves %0d/%0d, zero-power outputs %0d, LHC %0d RHC %0d LIN %0d",
             cnt_on, cnt_off, cnt_dec_bank[0], cnt_dec_bank[1], zero_ok, cnt_hand_l, cnt_hand_r, cnt_lin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog at mode %0d", mode);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
