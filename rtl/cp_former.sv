// cp_former: forms the two circular polarizations of one channel.
//
// A +90 or -90 degree phase shift of a complex value is an exchange of its
// real and imaginary parts with one sign inverted, so after equalization
//     LHC = X' - j*Y'' = (X'r + Y''i) + j(X'i - Y''r)
//     RHC = X' + j*Y'' = (X'r - Y''i) + j(X'i + Y''r)
// and the output powers are |LHC|^2 and |RHC|^2 in PWR_W = 51 bits. The
// quadrature sum and the 51-bit powers follow the design description; the
// circular voltages are also brought out.
//
// Timing: voltages one clock and powers two clocks after the input; the
// voltage outputs are delayed to line up with the powers. One per lane.
module cp_former
  import polconv_pkg::*;
#(
  parameter int unsigned P_NCH   = NCH,
  parameter int unsigned P_EQ_W  = EQ_W,
  parameter int unsigned P_PWR_W = PWR_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [$clog2(P_NCH)-1:0]     in_ch,
  input  logic signed [P_EQ_W-1:0]     in_xr,
  input  logic signed [P_EQ_W-1:0]     in_xi,
  input  logic signed [P_EQ_W-1:0]     in_yr,
  input  logic signed [P_EQ_W-1:0]     in_yi,
  output logic                         out_valid,
  output logic [$clog2(P_NCH)-1:0]     out_ch,
  output logic signed [P_EQ_W:0]       lhc_re,
  output logic signed [P_EQ_W:0]       lhc_im,
  output logic signed [P_EQ_W:0]       rhc_re,
  output logic signed [P_EQ_W:0]       rhc_im,
  output logic [P_PWR_W-1:0]           lhc_pwr,
  output logic [P_PWR_W-1:0]           rhc_pwr
);
  localparam int unsigned CB = $clog2(P_NCH);
  localparam int unsigned VW = P_EQ_W + 1;

  logic                 s1_v;
  logic [CB-1:0]        s1_ch;
  logic signed [VW-1:0] l_re, l_im, r_re, r_im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_ch <= '0;
      l_re <= '0; l_im <= '0; r_re <= '0; r_im <= '0;
    end else begin
      s1_v <= in_valid;
      if (in_valid) begin
        s1_ch <= in_ch;
        l_re  <= VW'(in_xr) + VW'(in_yi);
        l_im  <= VW'(in_xi) - VW'(in_yr);
        r_re  <= VW'(in_xr) - VW'(in_yi);
        r_im  <= VW'(in_xi) + VW'(in_yr);
      end
    end
  end

  logic signed [P_PWR_W-1:0] lre, lim, rre, rim;
  assign lre = P_PWR_W'(l_re);
  assign lim = P_PWR_W'(l_im);
  assign rre = P_PWR_W'(r_re);
  assign rim = P_PWR_W'(r_im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_ch <= '0;
      lhc_re <= '0; lhc_im <= '0; rhc_re <= '0; rhc_im <= '0;
      lhc_pwr <= '0; rhc_pwr <= '0;
    end else begin
      out_valid <= s1_v;
      if (s1_v) begin
        out_ch  <= s1_ch;
        lhc_re  <= l_re;
        lhc_im  <= l_im;
        rhc_re  <= r_re;
        rhc_im  <= r_im;
        lhc_pwr <= P_PWR_W'(lre * lre + lim * lim);
        rhc_pwr <= P_PWR_W'(rre * rre + rim * rim);
      end
    end
  end

endmodule
