// pwr_accum: calibration spectra accumulator of one FFT lane.
//
// For every decoded channel of the lane it forms the four calibration
// quantities |X|^2, |Y|^2 and the real and imaginary parts of the cross
// spectrum Z = X * conj(Y):
//     Zr = Xr*Yr + Xi*Yi,   Zi = Xi*Yr - Xr*Yi
// and adds them to a per-channel accumulator. Each quantity has a pair of
// accumulators, one for frames taken with the noise diode on and one for
// frames with it off, so that the later on-minus-off difference removes
// contributions that are present in both states. This is what the design
// description specifies; the accumulator width is chosen, as it asks, so
// that 2^INT_LOG2 frames (8.39 s over the eight lanes) cannot overflow.
//
// Control (own choice): a start pulse arms a new calibration. From the next
// frame start (channel 0) on, int_frames whole frames are accumulated; each
// frame goes into the bank selected by diode_on as sampled at its channel 0.
// The first frame that lands in a bank overwrites it instead of adding, so no
// clearing pass is needed. done rises after the last frame and stays high
// until the next start; busy is high in between.
//
// Timing: two-stage pipeline (products, then read-add-write). The read port
// returns all eight accumulators of channel rd_ch one clock after rd_en. A
// bank that received no frame in the last run reads as zero (for example the
// diode-off bank when a calibration is taken with the diode on only).
module pwr_accum
  import polconv_pkg::*;
#(
  parameter int unsigned P_NCH    = NCH,
  parameter int unsigned P_SPEC_W = SPEC_W,
  parameter int unsigned P_ACC_W  = ACC_W,
  parameter int unsigned P_INT_LOG2 = INT_LOG2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // decoded spectrum
  input  logic                         in_valid,
  input  logic [$clog2(P_NCH)-1:0]     in_ch,
  input  logic signed [P_SPEC_W-1:0]   in_xr,
  input  logic signed [P_SPEC_W-1:0]   in_xi,
  input  logic signed [P_SPEC_W-1:0]   in_yr,
  input  logic signed [P_SPEC_W-1:0]   in_yi,
  // control
  input  logic                         start,
  input  logic [P_INT_LOG2:0]          int_frames,  // 1 .. 2^P_INT_LOG2
  input  logic                         diode_on,
  output logic                         busy,
  output logic                         done,
  // read port: [quantity][bank], quantity 0..3 = |X|^2, |Y|^2, Zr, Zi,
  // bank 1 = diode on, 0 = diode off
  input  logic                         rd_en,
  input  logic [$clog2(P_NCH)-1:0]     rd_ch,
  output logic signed [P_ACC_W-1:0]    rd_data [4][2]
);
  localparam int unsigned CB  = $clog2(P_NCH);
  localparam int unsigned PW  = 2 * P_SPEC_W + 1;

  logic signed [P_ACC_W-1:0] acc [4][2][P_NCH];

  logic                  armed;       // waiting for / inside accumulation
  logic [P_INT_LOG2:0]   frames_done;
  logic                  in_frame;    // current frame is being accumulated
  logic                  cur_bank;
  logic [1:0]            fresh;       // bank not yet written in this run

  // frame bookkeeping
  wire frame_start = in_valid && in_ch == '0;
  wire frame_end   = in_valid && in_ch == CB'(P_NCH - 1);
  wire take_frame  = frame_start && armed && (frames_done < int_frames);
  wire acc_now     = in_valid && (in_frame || take_frame);
  wire bank_now    = take_frame ? diode_on : cur_bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed       <= 1'b0;
      frames_done <= '0;
      in_frame    <= 1'b0;
      cur_bank    <= 1'b0;
      done        <= 1'b0;
    end else if (start) begin
      armed       <= 1'b1;
      frames_done <= '0;
      in_frame    <= 1'b0;
      done        <= 1'b0;
    end else begin
      if (take_frame) begin
        in_frame <= 1'b1;
        cur_bank <= diode_on;
      end
      if (frame_end && (in_frame || take_frame)) begin
        in_frame    <= 1'b0;
        frames_done <= frames_done + 1'b1;
        if (frames_done + 1'b1 == int_frames) begin
          armed <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end
  assign busy = armed;

  // stage 1: products
  logic                 s1_v, s1_bank, s1_fresh;
  logic [CB-1:0]        s1_ch;
  logic signed [PW-1:0] s1_p [4];

  // operands sign-extended to the product width
  logic signed [PW-1:0] xr, xi, yr, yi;
  assign xr = PW'(in_xr);
  assign xi = PW'(in_xi);
  assign yr = PW'(in_yr);
  assign yi = PW'(in_yi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v     <= 1'b0;
      s1_bank  <= 1'b0;
      s1_fresh <= 1'b0;
      s1_ch    <= '0;
      for (int q = 0; q < 4; q++) s1_p[q] <= '0;
    end else begin
      s1_v <= acc_now;
      if (acc_now) begin
        s1_bank  <= bank_now;
        s1_fresh <= fresh[bank_now];
        s1_ch    <= in_ch;
        s1_p[0]  <= xr * xr + xi * xi;
        s1_p[1]  <= yr * yr + yi * yi;
        s1_p[2]  <= xr * yr + xi * yi;
        s1_p[3]  <= xi * yr - xr * yi;
      end
    end
  end

  // a bank stays fresh until the end of the first frame written into it
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      fresh <= 2'b11;
    else if (start)
      fresh <= 2'b11;
    else if (frame_end && (in_frame || take_frame))
      fresh[bank_now] <= 1'b0;
  end

  // stage 2: read-add-write
  always_ff @(posedge clk) begin
    if (s1_v) begin
      for (int q = 0; q < 4; q++)
        acc[q][s1_bank][s1_ch] <= s1_fresh ? P_ACC_W'(s1_p[q])
                                           : acc[q][s1_bank][s1_ch] + P_ACC_W'(s1_p[q]);
    end
  end

  // read port
  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int q = 0; q < 4; q++)
        for (int b = 0; b < 2; b++)
          rd_data[q][b] <= fresh[b] ? '0 : acc[q][b][rd_ch];
    end
  end

endmodule
