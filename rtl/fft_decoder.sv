// fft_decoder: recovers the spectra of two real signals from one complex FFT.
//
// Each FFT lane transforms z = x + j*y, with the x samples on the real input
// and the y samples on the imaginary input, which halves the number of FFT
// engines. Because x and y are real, their spectra follow from the FFT output
// Z by
//     X[k] = (Z[k] + conj(Z[N-k])) / 2
//     Y[k] = (Z[k] - conj(Z[N-k])) / (2j)
// (index N-k taken modulo N). The decoder does this for channels
// k = 0 .. NFFT/2-1, the frame length being twice the number of channels.
// The two-real-FFT relation is the one named in the design description; the
// buffering is this design's own: the bins of one frame are written into one
// half of a ping-pong buffer at the index the FFT reports, and once bin NFFT-1
// has arrived that half is read out, one channel per clock, reading Z[k] and
// Z[N-k] together, while the next frame fills the other half. The halving is
// an arithmetic shift (rounding toward minus infinity).
//
// Interface: in_valid/in_idx/in_re/in_im come from the FFT in any bin order.
// out_valid/out_ch/out_x*/out_y* carry channel out_ch; a frame's NFFT/2
// channels leave on consecutive clocks starting two clocks after its last bin
// arrived, so a lane delivers NFFT/2 channels per NFFT clocks.
//
// rst_n is both the asynchronous reset of the registers and the disable
// condition of the assertion below; a lint tool reports that double use,
// which is intended.
module fft_decoder
  import polconv_pkg::*;
#(
  parameter int unsigned P_NFFT = NFFT,
  parameter int unsigned P_IN_W = FFT_OUT_W,
  parameter int unsigned P_OUT_W = SPEC_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [$clog2(P_NFFT)-1:0]         in_idx,
  input  logic signed [P_IN_W-1:0]          in_re,
  input  logic signed [P_IN_W-1:0]          in_im,
  output logic                              out_valid,
  output logic [$clog2(P_NFFT/2)-1:0]       out_ch,
  output logic signed [P_OUT_W-1:0]         out_xr,
  output logic signed [P_OUT_W-1:0]         out_xi,
  output logic signed [P_OUT_W-1:0]         out_yr,
  output logic signed [P_OUT_W-1:0]         out_yi
);
  localparam int unsigned IB  = $clog2(P_NFFT);
  localparam int unsigned CB  = $clog2(P_NFFT/2);
  localparam int unsigned NCHL = P_NFFT / 2;

  logic signed [P_IN_W-1:0] mem_re [2][P_NFFT];
  logic signed [P_IN_W-1:0] mem_im [2][P_NFFT];

  logic          wbank;     // half being written
  logic          rbank;     // half being read
  logic          rd_act;
  logic [CB-1:0] rd_ch;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem_re[wbank][in_idx] <= in_re;
      mem_im[wbank][in_idx] <= in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank  <= 1'b0;
      rbank  <= 1'b0;
      rd_act <= 1'b0;
      rd_ch  <= '0;
    end else begin
      if (rd_act) begin
        rd_ch <= rd_ch + 1'b1;
        if (rd_ch == CB'(NCHL - 1)) rd_act <= 1'b0;
      end
      if (in_valid && in_idx == IB'(P_NFFT - 1)) begin
        wbank  <= ~wbank;
        rbank  <= wbank;
        rd_act <= 1'b1;
        rd_ch  <= '0;
      end
    end
  end

  // Z[k] and Z[N-k]
  logic [IB-1:0] idx_a, idx_b;
  logic signed [P_IN_W-1:0] ar, ai, br, bi;
  logic signed [P_IN_W:0]   s_xr, s_xi, s_yr, s_yi;
  always_comb begin
    idx_a = IB'(rd_ch);
    idx_b = IB'(P_NFFT) - idx_a;          // wraps to 0 for k = 0
    ar = mem_re[rbank][idx_a];
    ai = mem_im[rbank][idx_a];
    br = mem_re[rbank][idx_b];
    bi = mem_im[rbank][idx_b];
    s_xr = (P_IN_W+1)'(ar) + (P_IN_W+1)'(br);
    s_xi = (P_IN_W+1)'(ai) - (P_IN_W+1)'(bi);
    s_yr = (P_IN_W+1)'(ai) + (P_IN_W+1)'(bi);
    s_yi = (P_IN_W+1)'(br) - (P_IN_W+1)'(ar);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_xr    <= '0;
      out_xi    <= '0;
      out_yr    <= '0;
      out_yi    <= '0;
    end else begin
      out_valid <= rd_act;
      if (rd_act) begin
        out_ch <= rd_ch;
        out_xr <= P_OUT_W'(s_xr >>> 1);
        out_xi <= P_OUT_W'(s_xi >>> 1);
        out_yr <= P_OUT_W'(s_yr >>> 1);
        out_yi <= P_OUT_W'(s_yi >>> 1);
      end
    end
  end

  // A new frame must not complete while the previous one is still read out.
  property p_no_overrun;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && in_idx == IB'(P_NFFT - 1)) |-> (!rd_act || rd_ch == CB'(NCHL - 1));
  endproperty
  a_no_overrun: assert property (p_no_overrun);

endmodule
