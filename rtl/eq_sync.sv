// eq_sync: aligns the decoded spectra with their equalizer weights.
//
// During observation each decoder streams its channels with the channel
// number attached. For every lane this block sends that channel number to
// the lane's read port of both weight latches and delays the spectral data
// by the latch read latency (one clock), so that each channel leaves together
// with its own Gx*W, Gy*W, cos*W and sin*W. The need for this step is the
// design description's; the channel-number lookup is this design's way of
// doing it. Data pass only while obs_en is high (weights latched).
//
// Timing: the spectral outputs are registered, one clock after the input.
// The latch addresses and the weight outputs are plain wires (the address is
// the incoming channel number, the weights are the latch's registered read
// data unpacked), so they show as outputs driven straight from inputs.
module eq_sync
  import polconv_pkg::*;
#(
  parameter int unsigned P_LANES  = LANES,
  parameter int unsigned P_NCH    = NCH,
  parameter int unsigned P_SPEC_W = SPEC_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  obs_en,
  // decoded spectra, per lane
  input  logic [P_LANES-1:0]                    in_valid,
  input  logic [P_LANES-1:0][$clog2(P_NCH)-1:0] in_ch,
  input  logic signed [P_SPEC_W-1:0]            in_xr [P_LANES],
  input  logic signed [P_SPEC_W-1:0]            in_xi [P_LANES],
  input  logic signed [P_SPEC_W-1:0]            in_yr [P_LANES],
  input  logic signed [P_SPEC_W-1:0]            in_yi [P_LANES],
  // latch read ports (shared address to both latches)
  output logic [P_LANES-1:0][$clog2(P_NCH)-1:0] lat_rd_ch,
  input  logic [P_LANES-1:0][2*GAIN_W-1:0]      lat_gain,   // {Gx*W, Gy*W}
  input  logic [P_LANES-1:0][2*ROT_W-1:0]       lat_rot,    // {cos*W, sin*W}
  // aligned outputs
  output logic [P_LANES-1:0]                    out_valid,
  output logic [P_LANES-1:0][$clog2(P_NCH)-1:0] out_ch,
  output logic signed [P_SPEC_W-1:0]            out_xr [P_LANES],
  output logic signed [P_SPEC_W-1:0]            out_xi [P_LANES],
  output logic signed [P_SPEC_W-1:0]            out_yr [P_LANES],
  output logic signed [P_SPEC_W-1:0]            out_yi [P_LANES],
  output weights_t [P_LANES-1:0]                out_w
);
  assign lat_rd_ch = in_ch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_ch    <= '0;
      for (int l = 0; l < P_LANES; l++) begin
        out_xr[l] <= '0;
        out_xi[l] <= '0;
        out_yr[l] <= '0;
        out_yi[l] <= '0;
      end
    end else begin
      for (int l = 0; l < P_LANES; l++) begin
        out_valid[l] <= in_valid[l] && obs_en;
        if (in_valid[l]) begin
          out_ch[l] <= in_ch[l];
          out_xr[l] <= in_xr[l];
          out_xi[l] <= in_xi[l];
          out_yr[l] <= in_yr[l];
          out_yi[l] <= in_yi[l];
        end
      end
    end
  end

  // the latches answer one clock after the address, i.e. with the data above
  always_comb begin
    for (int l = 0; l < P_LANES; l++) begin
      out_w[l].gxw  = lat_gain[l][2*GAIN_W-1:GAIN_W];
      out_w[l].gyw  = lat_gain[l][GAIN_W-1:0];
      out_w[l].cosw = lat_rot[l][2*ROT_W-1:ROT_W];
      out_w[l].sinw = lat_rot[l][ROT_W-1:0];
    end
  end

endmodule
