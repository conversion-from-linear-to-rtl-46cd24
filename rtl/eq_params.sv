// eq_params: computes the per-channel equalizer weights after calibration.
//
// From the integrated calibration spectra (|X|^2, |Y|^2, Zr, Zi per channel,
// on minus off, summed over the lanes) it derives, for every channel r,
//     cos(theta) = Zr / |Z|,  sin(theta) = Zi / |Z|,   |Z| = sqrt(Zr^2 + Zi^2)
//     Gx = sqrt(Pmax / |X|^2),  Gy = sqrt(Pmax / |Y|^2)
// where Pmax is the largest |X|^2 or |Y|^2 of the band, and the window
// W(r) of window_fn. It writes Gx*W, Gy*W, cos*W and sin*W into the latches.
// These formulas, and that the window is folded into the latched weights,
// follow the design description. The description computes them with a
// floating-point divide and square-root core at 64 MHz; this block instead
// uses a shared fixed-point sequential divider and square root on the main
// clock. |Z| is first normalised: both parts are shifted right by the same s
// until they fit NORM_W-1 bits, which keeps the squares at 2*NORM_W bits
// (the role the floating-point exponent plays); |Z| = sqrt(...) << s.
//
// Number formats (own choice): gains unsigned with GAIN_F fractional bits,
// saturated at GAIN_W bits; cos/sin signed with ROT_F fractional bits. A
// channel with |X|^2 <= 0 (or |Y|^2 <= 0) gets gain 0; |Z| = 0 gives cos =
// sin = 0.
//
// Sequence: start -> pass 1 reads every channel and finds Pmax and max|Z|;
// pass 2 reads every channel again, computes the weights and writes them.
// Each channel read is a req/req_ch request answered by res_valid/res.
// done pulses at the end; busy is high from start to done. Pass 2 takes about
// 4*DW + 3*DW/2 clocks per channel.
module eq_params
  import polconv_pkg::*;
#(
  parameter int unsigned P_NCH    = NCH,
  parameter int unsigned P_SUM_W  = SUM_W,
  parameter int unsigned P_GAIN_W = GAIN_W,
  parameter int unsigned P_GAIN_F = GAIN_F,
  parameter int unsigned P_ROT_W  = ROT_W,
  parameter int unsigned P_ROT_F  = ROT_F,
  parameter int unsigned P_NORM_W = NORM_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // channel reads from acc_sum
  output logic                         req,
  output logic [$clog2(P_NCH)-1:0]     req_ch,
  input  logic                         res_valid,
  input  logic signed [P_SUM_W-1:0]    res [4],
  // latch write port
  output logic                         wr_en,
  output logic [$clog2(P_NCH)-1:0]     wr_ch,
  output logic [P_GAIN_W-1:0]          wr_gxw,
  output logic [P_GAIN_W-1:0]          wr_gyw,
  output logic signed [P_ROT_W-1:0]    wr_cosw,
  output logic signed [P_ROT_W-1:0]    wr_sinw,
  output logic                         wr_w,
  // results of pass 1, for monitoring
  output logic [P_SUM_W-1:0]           pmax,
  output logic [P_SUM_W-1:0]           max_mag
);
  localparam int unsigned CB = $clog2(P_NCH);
  // divider width: Pmax << 2*GAIN_F must fit
  localparam int unsigned DW = P_SUM_W + 2 * P_GAIN_F;
  // square-root width (even), at least 2*NORM_W
  localparam int unsigned SW0 = (DW > 2 * P_NORM_W) ? DW : 2 * P_NORM_W;
  localparam int unsigned SW  = SW0 + (SW0 % 2);
  localparam int unsigned SHW = $clog2(P_SUM_W + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_REQ, S_WAIT, S_NORM, S_SQZ, S_DCOS, S_DSIN,
    S_DGX, S_SGX, S_DGY, S_SGY, S_WRITE, S_NEXT, S_DONE
  } state_t;
  state_t state;

  logic          pass2;
  logic [CB-1:0] ch;

  // captured channel data
  logic signed [P_SUM_W-1:0] px, py, zr, zi;
  // normalised |Zr|, |Zi| and signs
  logic [P_NORM_W-1:0] azr, azi;
  logic                szr, szi;
  logic [SHW-1:0]      shift;
  logic [P_NORM_W-1:0] mz;        // sqrt of normalised |Z|^2
  logic [P_SUM_W-1:0]  magz;      // |Z|
  logic [P_ROT_F:0]    cos_m, sin_m;
  logic [P_GAIN_W-1:0] gx, gy;

  // ---- arithmetic units ----
  logic          div_start, div_done, div_busy;
  logic [DW-1:0] div_a, div_b, div_q, div_r;
  logic          sq_start, sq_done, sq_busy;
  logic [SW-1:0] sq_a;
  logic [SW/2-1:0] sq_root;

  seq_div #(.W(DW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(div_busy), .done(div_done), .quotient(div_q), .remainder(div_r)
  );

  seq_isqrt #(.W(SW)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand(sq_a),
    .busy(sq_busy), .done(sq_done), .root(sq_root)
  );

  // ---- window ----
  logic w_now;
  logic win_clear, win_meas;
  window_fn #(.P_NCH(P_NCH), .P_MAG_W(P_SUM_W)) u_win (
    .clk, .rst_n, .clear(win_clear), .meas_valid(win_meas), .meas_mag(magz),
    .ch, .mag(magz), .w(w_now), .max_mag
  );

  // ---- normalisation of |Zr|, |Zi| (combinational on the captured data) ----
  logic [P_SUM_W-1:0] abs_zr, abs_zi, mx;
  logic [SHW-1:0]     nshift;
  always_comb begin
    abs_zr = zr[P_SUM_W-1] ? P_SUM_W'(-zr) : P_SUM_W'(zr);
    abs_zi = zi[P_SUM_W-1] ? P_SUM_W'(-zi) : P_SUM_W'(zi);
    mx     = abs_zr | abs_zi;
    nshift = '0;
    for (int b = P_NORM_W - 1; b < P_SUM_W; b++)
      if (mx[b]) nshift = SHW'(b - (P_NORM_W - 2));
  end

  // running maximum of |X|^2 and |Y|^2 (negative differences ignored)
  logic [P_SUM_W-1:0] upx, upy, pmax_next;
  always_comb begin
    upx = px[P_SUM_W-1] ? '0 : P_SUM_W'(px);
    upy = py[P_SUM_W-1] ? '0 : P_SUM_W'(py);
    pmax_next = pmax;
    if (upx > pmax_next) pmax_next = upx;
    if (upy > pmax_next) pmax_next = upy;
  end

  // saturating gain from the square root of Pmax/P scaled by 2^(2*GAIN_F)
  function automatic logic [P_GAIN_W-1:0] sat_gain(input logic [SW/2-1:0] r);
    if (r >= (SW/2)'(1) << P_GAIN_W) return '1;
    else return P_GAIN_W'(r);
  endfunction

  function automatic logic signed [P_ROT_W-1:0] signed_rot(input logic [P_ROT_F:0] m,
                                                           input logic neg);
    logic signed [P_ROT_W-1:0] v;
    v = P_ROT_W'(m);
    return neg ? -v : v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pass2     <= 1'b0;
      ch        <= '0;
      px <= '0; py <= '0; zr <= '0; zi <= '0;
      azr <= '0; azi <= '0; szr <= 1'b0; szi <= 1'b0; shift <= '0;
      mz <= '0; magz <= '0; cos_m <= '0; sin_m <= '0; gx <= '0; gy <= '0;
      pmax      <= '0;
      div_start <= 1'b0;
      div_a     <= '0;
      div_b     <= '0;
      sq_start  <= 1'b0;
      sq_a      <= '0;
      done      <= 1'b0;
    end else begin
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pass2 <= 1'b0;
          ch    <= '0;
          pmax  <= '0;
          state <= S_REQ;
        end
        S_REQ:  state <= S_WAIT;
        S_WAIT: if (res_valid) begin
          px <= res[0]; py <= res[1]; zr <= res[2]; zi <= res[3];
          state <= S_NORM;
        end
        S_NORM: begin
          azr   <= P_NORM_W'(abs_zr >> nshift);
          azi   <= P_NORM_W'(abs_zi >> nshift);
          szr   <= zr[P_SUM_W-1];
          szi   <= zi[P_SUM_W-1];
          shift <= nshift;
          sq_a  <= SW'(P_NORM_W'(abs_zr >> nshift)) * SW'(P_NORM_W'(abs_zr >> nshift))
                 + SW'(P_NORM_W'(abs_zi >> nshift)) * SW'(P_NORM_W'(abs_zi >> nshift));
          sq_start <= 1'b1;
          if (!pass2) pmax <= pmax_next;
          state <= S_SQZ;
        end
        S_SQZ: if (sq_done) begin
          mz   <= P_NORM_W'(sq_root);
          magz <= P_SUM_W'(P_SUM_W'(sq_root) << shift);
          if (!pass2) begin
            state <= S_NEXT;
          end else begin
            div_a     <= DW'(azr) << P_ROT_F;
            div_b     <= DW'(sq_root);
            div_start <= 1'b1;
            state     <= S_DCOS;
          end
        end
        S_DCOS: if (div_done) begin
          cos_m     <= (mz == '0) ? '0 : (P_ROT_F+1)'(div_q);
          div_a     <= DW'(azi) << P_ROT_F;
          div_b     <= DW'(mz);
          div_start <= 1'b1;
          state     <= S_DSIN;
        end
        S_DSIN: if (div_done) begin
          sin_m     <= (mz == '0) ? '0 : (P_ROT_F+1)'(div_q);
          div_a     <= DW'(pmax) << (2 * P_GAIN_F);
          div_b     <= DW'(P_SUM_W'(px));
          div_start <= 1'b1;
          state     <= S_DGX;
        end
        S_DGX: if (div_done) begin
          sq_a     <= SW'(div_q);
          sq_start <= 1'b1;
          state    <= S_SGX;
        end
        S_SGX: if (sq_done) begin
          gx <= (px[P_SUM_W-1] || px == '0) ? '0 : sat_gain(sq_root);
          div_a     <= DW'(pmax) << (2 * P_GAIN_F);
          div_b     <= DW'(P_SUM_W'(py));
          div_start <= 1'b1;
          state     <= S_DGY;
        end
        S_DGY: if (div_done) begin
          sq_a     <= SW'(div_q);
          sq_start <= 1'b1;
          state    <= S_SGY;
        end
        S_SGY: if (sq_done) begin
          gy    <= (py[P_SUM_W-1] || py == '0) ? '0 : sat_gain(sq_root);
          state <= S_WRITE;
        end
        S_WRITE: state <= S_NEXT;
        S_NEXT: begin
          if (ch == CB'(P_NCH - 1)) begin
            if (pass2) begin
              state <= S_DONE;
            end else begin
              pass2 <= 1'b1;
              ch    <= '0;
              state <= S_REQ;
            end
          end else begin
            ch    <= ch + 1'b1;
            state <= S_REQ;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign req       = (state == S_REQ);
  assign req_ch    = ch;
  assign win_clear = (state == S_IDLE) && start;
  assign win_meas  = (state == S_NEXT) && !pass2;

  // latch write, window folded in
  assign wr_en   = (state == S_WRITE);
  assign wr_ch   = ch;
  assign wr_w    = w_now;
  assign wr_gxw  = w_now ? gx : '0;
  assign wr_gyw  = w_now ? gy : '0;
  assign wr_cosw = w_now ? signed_rot(cos_m, szr) : '0;
  assign wr_sinw = w_now ? signed_rot(sin_m, szi) : '0;

endmodule
