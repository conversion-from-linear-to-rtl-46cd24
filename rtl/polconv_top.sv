// polconv_top: real-time linear-to-circular polarization converter.
//
// Two sampled linear polarizations x and y, each delivered as LANES parallel
// 10-bit samples per clock, are cut into 1024-sample frames (sfg, one per
// polarization) and fed to LANES FFT engines, x on the real and y on the
// imaginary input. The FFT engines are outside this module: their inputs and
// outputs are ports. Each engine's output is split back into X and Y
// (fft_decoder). Then two things happen on the same spectra:
//
//  * Calibration (mode ACCUM, then COMPUTE). cal_start arms the per-lane
//    accumulators (pwr_accum), which integrate |X|^2, |Y|^2 and Z = X Y*
//    over int_frames frames per lane, separately for noise diode on and off.
//    The weight computation (eq_params) then reads the on-minus-off sums over
//    the lanes (acc_sum), derives per channel the gains, the rotation
//    cos/sin and the window, and writes them into the two latches
//    (coef_latch: gains, rotation).
//  * Observation (mode OBSERVE, once weights are latched). eq_sync looks up
//    the weights of each channel as it leaves its decoder, the equalizer
//    rotates and scales it, and cp_former adds X' and +-90 deg shifted Y''
//    into LHC and RHC, giving |V_LHC|^2 and |V_RHC|^2 per channel and lane.
//
// The block structure is that of the design description. The mode sequencer
// here (start accumulation, start weight computation when every lane is done,
// enable the equalizer when the weights are written) and the run-time
// integration length int_frames (1 .. 2^20 frames per lane; 2^20 gives the
// 8.39 s of the description) are this design's choices.
//
// Timing: one clock domain (128 MHz at full rate). Latency from the last bin
// of an FFT frame to the first output power is 7 clocks.
//
// rst_n is both the asynchronous reset of the registers and the disable
// condition of the assertion below; a lint tool reports that double use,
// which is intended.
module polconv_top
  import polconv_pkg::*;
#(
  parameter int unsigned P_LANES = LANES,
  parameter int unsigned P_NFFT  = NFFT
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // from the clock rate reduction (sampler demultiplexer)
  input  logic                                   in_valid,
  input  logic [P_LANES-1:0][SAMP_W-1:0]         x_samp,
  input  logic [P_LANES-1:0][SAMP_W-1:0]         y_samp,
  // to the FFT engines: real = x, imaginary = y
  output logic [P_LANES-1:0]                     fft_in_valid,
  output logic [P_LANES-1:0][$clog2(P_NFFT)-1:0] fft_in_idx,
  output logic [P_LANES-1:0][FFT_IN_W-1:0]       fft_in_re,
  output logic [P_LANES-1:0][FFT_IN_W-1:0]       fft_in_im,
  // from the FFT engines
  input  logic [P_LANES-1:0]                     fft_out_valid,
  input  logic [P_LANES-1:0][$clog2(P_NFFT)-1:0] fft_out_idx,
  input  logic [P_LANES-1:0][FFT_OUT_W-1:0]      fft_out_re,
  input  logic [P_LANES-1:0][FFT_OUT_W-1:0]      fft_out_im,
  // calibration control
  input  logic                                   cal_start,
  input  logic [INT_LOG2:0]                      int_frames,
  input  logic                                   diode_on,
  output mode_t                                  mode,
  output logic                                   params_valid,
  // circular polarization outputs, per lane
  output logic [P_LANES-1:0]                     out_valid,
  output logic [P_LANES-1:0][$clog2(P_NFFT/2)-1:0] out_ch,
  output logic [P_LANES-1:0][V_W-1:0]            lhc_re,
  output logic [P_LANES-1:0][V_W-1:0]            lhc_im,
  output logic [P_LANES-1:0][V_W-1:0]            rhc_re,
  output logic [P_LANES-1:0][V_W-1:0]            rhc_im,
  output logic [P_LANES-1:0][PWR_W-1:0]          lhc_pwr,
  output logic [P_LANES-1:0][PWR_W-1:0]          rhc_pwr
);
  localparam int unsigned NCHL = P_NFFT / 2;
  localparam int unsigned CB   = $clog2(NCHL);

  // ---------------- frame generators ----------------
  logic [P_LANES-1:0]                     fx_valid, fy_valid;
  logic [P_LANES-1:0][$clog2(P_NFFT)-1:0] fx_idx, fy_idx;

  sfg #(.P_LANES(P_LANES), .P_NFFT(P_NFFT)) u_sfg_x (
    .clk, .rst_n, .in_valid, .in_samp(x_samp),
    .out_valid(fx_valid), .out_idx(fx_idx), .out_samp(fft_in_re)
  );
  sfg #(.P_LANES(P_LANES), .P_NFFT(P_NFFT)) u_sfg_y (
    .clk, .rst_n, .in_valid, .in_samp(y_samp),
    .out_valid(fy_valid), .out_idx(fy_idx), .out_samp(fft_in_im)
  );
  assign fft_in_valid = fx_valid;
  assign fft_in_idx   = fx_idx;

  // ---------------- decoders ----------------
  logic [P_LANES-1:0]          dv;
  logic [P_LANES-1:0][CB-1:0]  dch;
  logic signed [SPEC_W-1:0]    dxr [P_LANES], dxi [P_LANES], dyr [P_LANES], dyi [P_LANES];

  // ---------------- accumulators ----------------
  logic [P_LANES-1:0]          acc_busy, acc_done;
  logic                        acc_start;
  logic                        lane_rd_en;
  logic [CB-1:0]               lane_rd_ch;
  logic signed [ACC_W-1:0]     lane_data [P_LANES][4][2];

  for (genvar l = 0; l < P_LANES; l++) begin : g_lane
    fft_decoder #(.P_NFFT(P_NFFT)) u_dec (
      .clk, .rst_n,
      .in_valid(fft_out_valid[l]), .in_idx(fft_out_idx[l]),
      .in_re($signed(fft_out_re[l])), .in_im($signed(fft_out_im[l])),
      .out_valid(dv[l]), .out_ch(dch[l]),
      .out_xr(dxr[l]), .out_xi(dxi[l]), .out_yr(dyr[l]), .out_yi(dyi[l])
    );

    pwr_accum #(.P_NCH(NCHL)) u_acc (
      .clk, .rst_n,
      .in_valid(dv[l]), .in_ch(dch[l]),
      .in_xr(dxr[l]), .in_xi(dxi[l]), .in_yr(dyr[l]), .in_yi(dyi[l]),
      .start(acc_start), .int_frames, .diode_on,
      .busy(acc_busy[l]), .done(acc_done[l]),
      .rd_en(lane_rd_en), .rd_ch(lane_rd_ch), .rd_data(lane_data[l])
    );
  end

  // ---------------- sum of lanes, weights ----------------
  logic                       eq_req, eq_res_valid;
  logic [CB-1:0]              eq_req_ch;
  logic signed [SUM_W-1:0]    eq_res [4];
  logic                       eqp_start, eqp_busy, eqp_done;
  logic                       wr_en, wr_w;
  logic [CB-1:0]              wr_ch;
  logic [GAIN_W-1:0]          wr_gxw, wr_gyw;
  logic signed [ROT_W-1:0]    wr_cosw, wr_sinw;
  logic [SUM_W-1:0]           pmax, max_mag;

  acc_sum #(.P_LANES(P_LANES), .P_NCH(NCHL)) u_sum (
    .clk, .rst_n, .req(eq_req), .req_ch(eq_req_ch),
    .lane_rd_en, .lane_rd_ch, .lane_data,
    .res_valid(eq_res_valid), .res(eq_res)
  );

  eq_params #(.P_NCH(NCHL)) u_eqp (
    .clk, .rst_n, .start(eqp_start), .busy(eqp_busy), .done(eqp_done),
    .req(eq_req), .req_ch(eq_req_ch), .res_valid(eq_res_valid), .res(eq_res),
    .wr_en, .wr_ch, .wr_gxw, .wr_gyw, .wr_cosw, .wr_sinw, .wr_w,
    .pmax, .max_mag
  );

  // ---------------- latches ----------------
  logic [P_LANES-1:0][CB-1:0]         lat_rd_ch;
  logic [P_LANES-1:0][2*GAIN_W-1:0]   lat_gain;
  logic [P_LANES-1:0][2*ROT_W-1:0]    lat_rot;

  coef_latch #(.P_NCH(NCHL), .P_DW(2*GAIN_W), .P_NRD(P_LANES)) u_lat_gain (
    .clk, .rst_n, .wr_en, .wr_ch, .wr_data({wr_gxw, wr_gyw}),
    .rd_ch(lat_rd_ch), .rd_data(lat_gain)
  );
  coef_latch #(.P_NCH(NCHL), .P_DW(2*ROT_W), .P_NRD(P_LANES)) u_lat_rot (
    .clk, .rst_n, .wr_en, .wr_ch, .wr_data({wr_cosw, wr_sinw}),
    .rd_ch(lat_rd_ch), .rd_data(lat_rot)
  );

  // ---------------- synchronization, equalizer, formation ----------------
  logic [P_LANES-1:0]          sv;
  logic [P_LANES-1:0][CB-1:0]  sch;
  logic signed [SPEC_W-1:0]    sxr [P_LANES], sxi [P_LANES], syr [P_LANES], syi [P_LANES];
  weights_t [P_LANES-1:0]      sw;

  eq_sync #(.P_LANES(P_LANES), .P_NCH(NCHL)) u_sync (
    .clk, .rst_n, .obs_en(params_valid),
    .in_valid(dv), .in_ch(dch), .in_xr(dxr), .in_xi(dxi), .in_yr(dyr), .in_yi(dyi),
    .lat_rd_ch, .lat_gain, .lat_rot,
    .out_valid(sv), .out_ch(sch), .out_xr(sxr), .out_xi(sxi), .out_yr(syr), .out_yi(syi),
    .out_w(sw)
  );

  for (genvar l = 0; l < P_LANES; l++) begin : g_out
    logic                      ev;
    logic [CB-1:0]             ech;
    logic signed [EQ_W-1:0]    exr, exi, eyr, eyi;
    logic signed [V_W-1:0]     lre, lim, rre, rim;

    equalizer #(.P_NCH(NCHL)) u_eq (
      .clk, .rst_n, .in_valid(sv[l]), .in_ch(sch[l]),
      .in_xr(sxr[l]), .in_xi(sxi[l]), .in_yr(syr[l]), .in_yi(syi[l]), .in_w(sw[l]),
      .out_valid(ev), .out_ch(ech), .out_xr(exr), .out_xi(exi), .out_yr(eyr), .out_yi(eyi)
    );

    cp_former #(.P_NCH(NCHL)) u_cp (
      .clk, .rst_n, .in_valid(ev), .in_ch(ech),
      .in_xr(exr), .in_xi(exi), .in_yr(eyr), .in_yi(eyi),
      .out_valid(out_valid[l]), .out_ch(out_ch[l]),
      .lhc_re(lre), .lhc_im(lim), .rhc_re(rre), .rhc_im(rim),
      .lhc_pwr(lhc_pwr[l]), .rhc_pwr(rhc_pwr[l])
    );
    assign lhc_re[l] = lre;
    assign lhc_im[l] = lim;
    assign rhc_re[l] = rre;
    assign rhc_im[l] = rim;
  end

  // ---------------- mode sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode         <= MODE_IDLE;
      params_valid <= 1'b0;
      acc_start    <= 1'b0;
      eqp_start    <= 1'b0;
    end else begin
      acc_start <= 1'b0;
      eqp_start <= 1'b0;
      if (cal_start) begin
        mode         <= MODE_ACCUM;
        params_valid <= 1'b0;
        acc_start    <= 1'b1;
      end else begin
        unique case (mode)
          MODE_ACCUM: if (!acc_start && &acc_done) begin
            mode      <= MODE_COMPUTE;
            eqp_start <= 1'b1;
          end
          MODE_COMPUTE: if (eqp_done) begin
            mode         <= MODE_OBSERVE;
            params_valid <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  // the sampler stream must keep both polarizations in step
  a_xy_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    fx_valid == fy_valid && fx_idx == fy_idx);

endmodule
