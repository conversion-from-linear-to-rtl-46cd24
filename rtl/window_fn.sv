// window_fn: spectral window of the equalizer.
//
// Channels whose cross-spectrum amplitude |Z| exceeds a quarter of the
// largest |Z| of the band get weight 1, all others weight 0; channel 0 (DC)
// always gets weight 1 so that the converter's DC term passes undisturbed.
// This keeps the equalizer from amplifying the filter flanks, where little
// signal is left. The rule (quarter of the maximum, plus a unit delta at DC)
// is the design description's; the two-pass use is this design's choice.
//
// Use: clear resets the running maximum; during a first pass over the band
// every |Z| is presented with meas_valid. During the second pass w gives the
// window for channel ch with amplitude mag, combinationally:
//     w = (ch == 0) || (4 * mag > max|Z|)
module window_fn
  import polconv_pkg::*;
#(
  parameter int unsigned P_NCH   = NCH,
  parameter int unsigned P_MAG_W = SUM_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       meas_valid,
  input  logic [P_MAG_W-1:0]         meas_mag,
  input  logic [$clog2(P_NCH)-1:0]   ch,
  input  logic [P_MAG_W-1:0]         mag,
  output logic                       w,
  output logic [P_MAG_W-1:0]         max_mag
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      max_mag <= '0;
    else if (clear)
      max_mag <= '0;
    else if (meas_valid && meas_mag > max_mag)
      max_mag <= meas_mag;
  end

  assign w = (ch == '0) || ({mag, 2'b00} > {2'b00, max_mag});

endmodule
