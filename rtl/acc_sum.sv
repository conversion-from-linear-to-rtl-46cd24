// acc_sum: on-minus-off difference and sum over the FFT lanes.
//
// After accumulation the calibration spectra sit in LANES lane accumulators,
// each with a noise-diode-on and a noise-diode-off bank. For the channel that
// the weight computation asks for, this block reads that channel from all
// lanes at once, forms on minus off for each of the four quantities
// (|X|^2, |Y|^2, Zr, Zi) and adds the LANES differences, giving the final
// integrated spectra. The on/off differencing and the summing of the eight
// lanes follow the design description; reading all lanes in parallel, one
// channel per request, is this design's choice.
//
// Timing: req/req_ch is forwarded unregistered to the lane read ports (which
// answer one clock later); the sums appear registered on res_valid/res_*
// two clocks after req.
module acc_sum
  import polconv_pkg::*;
#(
  parameter int unsigned P_LANES = LANES,
  parameter int unsigned P_NCH   = NCH,
  parameter int unsigned P_ACC_W = ACC_W,
  parameter int unsigned P_SUM_W = SUM_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req,
  input  logic [$clog2(P_NCH)-1:0]    req_ch,
  // to / from the lane accumulators
  output logic                        lane_rd_en,
  output logic [$clog2(P_NCH)-1:0]    lane_rd_ch,
  input  logic signed [P_ACC_W-1:0]   lane_data [P_LANES][4][2],
  // result: quantity 0..3 = |X|^2, |Y|^2, Zr, Zi
  output logic                        res_valid,
  output logic signed [P_SUM_W-1:0]   res [4]
);
  assign lane_rd_en = req;
  assign lane_rd_ch = req_ch;

  logic req_d;
  logic signed [P_SUM_W-1:0] sum [4];

  always_comb begin
    for (int q = 0; q < 4; q++) begin
      sum[q] = '0;
      for (int l = 0; l < P_LANES; l++)
        sum[q] = sum[q] + P_SUM_W'(lane_data[l][q][1]) - P_SUM_W'(lane_data[l][q][0]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_d     <= 1'b0;
      res_valid <= 1'b0;
      for (int q = 0; q < 4; q++) res[q] <= '0;
    end else begin
      req_d     <= req;
      res_valid <= req_d;
      if (req_d)
        for (int q = 0; q < 4; q++) res[q] <= sum[q];
    end
  end

endmodule
