// equalizer: applies the calibration weights to one channel of X and Y.
//
//     X'  = Gx*W * X
//     Y'' = Gy*W * [cos -sin; sin cos] * Y
// i.e. Y is rotated by the measured x-y phase difference theta and both
// polarizations are scaled to the common level of the band maximum. This is
// the equalization of the design description. Fixed-point handling is this
// design's choice: the rotation result is shifted right by ROT_F, the gain
// products by GAIN_F (arithmetic shifts, rounding toward minus infinity), and
// X', Y'' saturate to EQ_W bits.
//
// Timing: two-stage pipeline (rotation, gain); out_* follow in_* by two
// clocks. One instance per FFT lane.
module equalizer
  import polconv_pkg::*;
#(
  parameter int unsigned P_NCH    = NCH,
  parameter int unsigned P_SPEC_W = SPEC_W,
  parameter int unsigned P_EQ_W   = EQ_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [$clog2(P_NCH)-1:0]     in_ch,
  input  logic signed [P_SPEC_W-1:0]   in_xr,
  input  logic signed [P_SPEC_W-1:0]   in_xi,
  input  logic signed [P_SPEC_W-1:0]   in_yr,
  input  logic signed [P_SPEC_W-1:0]   in_yi,
  input  weights_t                     in_w,
  output logic                         out_valid,
  output logic [$clog2(P_NCH)-1:0]     out_ch,
  output logic signed [P_EQ_W-1:0]     out_xr,
  output logic signed [P_EQ_W-1:0]     out_xi,
  output logic signed [P_EQ_W-1:0]     out_yr,
  output logic signed [P_EQ_W-1:0]     out_yi
);
  localparam int unsigned CB = $clog2(P_NCH);
  localparam int unsigned RW = P_SPEC_W + 2;                // rotated Y
  localparam int unsigned MW = P_SPEC_W + ROT_W + 1;        // rotation products
  localparam int unsigned GW = RW + GAIN_W + 1;             // gain products

  function automatic logic signed [P_EQ_W-1:0] sat(input logic signed [GW-1:0] v);
    logic signed [GW-1:0] hi, lo;
    hi = GW'((64'sd1 <<< (P_EQ_W - 1)) - 1);
    lo = -GW'(64'sd1 <<< (P_EQ_W - 1));
    if (v > hi) return {1'b0, {(P_EQ_W-1){1'b1}}};
    if (v < lo) return {1'b1, {(P_EQ_W-1){1'b0}}};
    return P_EQ_W'(v);
  endfunction

  // stage 1: rotation of Y, X and gains carried along
  logic signed [MW-1:0] yr_m, yi_m, cs, sn;
  logic signed [MW-1:0] rot_r, rot_i;
  always_comb begin
    cs = MW'(in_w.cosw);
    sn = MW'(in_w.sinw);
    yr_m = MW'(in_yr);
    yi_m = MW'(in_yi);
    rot_r = (cs * yr_m - sn * yi_m) >>> ROT_F;
    rot_i = (sn * yr_m + cs * yi_m) >>> ROT_F;
  end

  logic                      s1_v;
  logic [CB-1:0]             s1_ch;
  logic signed [RW-1:0]      s1_xr, s1_xi, s1_yr, s1_yi;
  logic [GAIN_W-1:0]         s1_gx, s1_gy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_ch <= '0;
      s1_xr <= '0; s1_xi <= '0; s1_yr <= '0; s1_yi <= '0;
      s1_gx <= '0; s1_gy <= '0;
    end else begin
      s1_v <= in_valid;
      if (in_valid) begin
        s1_ch <= in_ch;
        s1_xr <= RW'(in_xr);
        s1_xi <= RW'(in_xi);
        s1_yr <= RW'(rot_r);
        s1_yi <= RW'(rot_i);
        s1_gx <= in_w.gxw;
        s1_gy <= in_w.gyw;
      end
    end
  end

  // stage 2: gains
  logic signed [GW-1:0] gx_s, gy_s;
  logic signed [GW-1:0] px_r, px_i, py_r, py_i;
  always_comb begin
    gx_s = GW'({1'b0, s1_gx});
    gy_s = GW'({1'b0, s1_gy});
    px_r = (gx_s * GW'(s1_xr)) >>> GAIN_F;
    px_i = (gx_s * GW'(s1_xi)) >>> GAIN_F;
    py_r = (gy_s * GW'(s1_yr)) >>> GAIN_F;
    py_i = (gy_s * GW'(s1_yi)) >>> GAIN_F;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_ch <= '0;
      out_xr <= '0; out_xi <= '0; out_yr <= '0; out_yi <= '0;
    end else begin
      out_valid <= s1_v;
      if (s1_v) begin
        out_ch <= s1_ch;
        out_xr <= sat(px_r);
        out_xi <= sat(px_i);
        out_yr <= sat(py_r);
        out_yi <= sat(py_i);
      end
    end
  end

endmodule
