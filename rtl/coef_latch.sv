// coef_latch: per-channel weight store between calibration and observation.
//
// Holds one DW-bit word per spectral channel. The weight computation writes
// a channel through the single write port; during observation every FFT lane
// reads the weights of the channel it is currently producing, so the store
// has one read port per lane. The converter uses two of these, one for the
// gains (Gx*W, Gy*W) and one for the rotation (cos*W, sin*W), as in the
// design description; the multi-port register-file organisation, the reset to
// zero (all channels blocked until calibrated) and the one-clock registered
// read are this design's choices.
module coef_latch
  import polconv_pkg::*;
#(
  parameter int unsigned P_NCH = NCH,
  parameter int unsigned P_DW  = 2 * GAIN_W,
  parameter int unsigned P_NRD = LANES
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            wr_en,
  input  logic [$clog2(P_NCH)-1:0]        wr_ch,
  input  logic [P_DW-1:0]                 wr_data,
  input  logic [P_NRD-1:0][$clog2(P_NCH)-1:0] rd_ch,
  output logic [P_NRD-1:0][P_DW-1:0]      rd_data
);
  logic [P_DW-1:0] mem [P_NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < P_NCH; c++) mem[c] <= '0;
    end else if (wr_en) begin
      mem[wr_ch] <= wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data <= '0;
    end else begin
      for (int p = 0; p < P_NRD; p++) rd_data[p] <= mem[rd_ch[p]];
    end
  end

endmodule
