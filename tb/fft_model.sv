// fft_model: behavioural model of one streaming FFT engine (not synthesizable).
//
// Stands in for the vendor FFT core in simulation. It collects one frame of
// NFFT complex samples, written at the index given with each sample; when
// the sample with index NFFT-1 arrives it computes the forward transform
//     Z[k] = sum_n z[n] exp(-j 2 pi n k / NFFT)
// in floating point (radix-2), rounds to integers (unscaled) and then emits
// bins 0..NFFT-1 in natural order, one per clock, starting on the next clock.
module fft_model #(
  parameter int unsigned NFFT  = 1024,
  parameter int unsigned IN_W  = 11,
  parameter int unsigned OUT_W = 22
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [$clog2(NFFT)-1:0]   in_idx,
  input  logic [IN_W-1:0]           in_re,
  input  logic [IN_W-1:0]           in_im,
  output logic                      out_valid,
  output logic [$clog2(NFFT)-1:0]   out_idx,
  output logic [OUT_W-1:0]          out_re,
  output logic [OUT_W-1:0]          out_im
);
  localparam int unsigned LG = $clog2(NFFT);

  real xr [NFFT], xi [NFFT];
  real fr [NFFT], fi [NFFT];
  real tw_r [NFFT/2], tw_i [NFFT/2];   // exp(-j 2 pi m / NFFT)
  initial
    for (int m = 0; m < NFFT / 2; m++) begin
      tw_r[m] = $cos(-2.0 * 3.14159265358979323846 * real'(m) / real'(NFFT));
      tw_i[m] = $sin(-2.0 * 3.14159265358979323846 * real'(m) / real'(NFFT));
    end
  int  res_re [NFFT], res_im [NFFT];
  int  emit_cnt;
  bit  emitting;
  int  frames;

  function automatic int unsigned bitrev(input int unsigned v);
    int unsigned r = 0;
    for (int b = 0; b < LG; b++) r |= ((v >> b) & 1) << (LG - 1 - b);
    return r;
  endfunction

  task automatic compute();
    real wr, wi, tr, ti, ur, ui;
    int half;
    for (int n = 0; n < NFFT; n++) begin
      fr[bitrev(n)] = xr[n];
      fi[bitrev(n)] = xi[n];
    end
    for (int len = 2; len <= NFFT; len *= 2) begin
      half = len / 2;
      for (int s = 0; s < NFFT; s += len) begin
        for (int k = 0; k < half; k++) begin
          wr = tw_r[k * (NFFT / len)];
          wi = tw_i[k * (NFFT / len)];
          tr = wr * fr[s+k+half] - wi * fi[s+k+half];
          ti = wr * fi[s+k+half] + wi * fr[s+k+half];
          ur = fr[s+k];
          ui = fi[s+k];
          fr[s+k]      = ur + tr;
          fi[s+k]      = ui + ti;
          fr[s+k+half] = ur - tr;
          fi[s+k+half] = ui - ti;
        end
      end
    end
    for (int k = 0; k < NFFT; k++) begin
      res_re[k] = int'($floor(fr[k] + 0.5));
      res_im[k] = int'($floor(fi[k] + 0.5));
    end
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emitting  <= 1'b0;
      emit_cnt  <= 0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_re    <= '0;
      out_im    <= '0;
      frames    <= 0;
    end else begin
      out_valid <= 1'b0;
      if (emitting) begin
        out_valid <= 1'b1;
        out_idx   <= LG'(emit_cnt);
        out_re    <= OUT_W'(res_re[emit_cnt]);
        out_im    <= OUT_W'(res_im[emit_cnt]);
        if (emit_cnt == NFFT - 1) emitting <= 1'b0;
        emit_cnt  <= emit_cnt + 1;
      end
      if (in_valid) begin
        xr[in_idx] = real'($signed(in_re));
        xi[in_idx] = real'($signed(in_im));
        if (in_idx == LG'(NFFT - 1)) begin
          compute();
          emitting <= 1'b1;
          emit_cnt <= 0;
          frames   <= frames + 1;
        end
      end
    end
  end

endmodule
