// sfg: serial frame generator for one polarization.
//
// The sampler delivers LANES samples in parallel on every clock (8 samples at
// 128 MHz for 1024 MS/s). The frame generator cuts this stream into frames of
// NFFT samples and hands each frame to one of LANES FFT lanes as a serial
// stream of one sample per clock. It holds LANES frame buffers. Incoming words
// of LANES samples fill one buffer at a time; after NFFT/LANES words the next
// buffer is selected. A buffer starts to be read out serially on the clock
// after its first word was written, so that writing (LANES samples per clock)
// and reading (one sample per clock) of the same buffer overlap. Reading the
// last sample of a frame coincides with writing the first word of the frame
// LANES frames later into the same buffer, so every lane streams without gaps.
// All of this follows the design description.
//
// Each buffer is organised as LANES banks of NFFT/LANES words: a word write
// puts sample j into bank j, and serial sample k is read from bank k mod
// LANES at address k / LANES. Samples are converted on the way out from
// 10-bit positive integers to FFT_IN_W-bit two's complement by zero extension.
//
// Interface: in_valid qualifies in_samp; a clock without in_valid freezes the
// whole block (writes and reads), so gaps in the input keep frames aligned
// (an own choice; the description assumes a continuous stream). Outputs are
// registered: out_valid[b], out_idx[b] (sample index 0..NFFT-1 within the
// frame) and out_samp[b] for lane b. Sample 0 of a frame leaves two enabled
// clocks after the word that carried it.
module sfg
  import polconv_pkg::*;
#(
  parameter int unsigned P_LANES  = LANES,
  parameter int unsigned P_NFFT   = NFFT,
  parameter int unsigned P_SAMP_W = SAMP_W,
  parameter int unsigned P_OUT_W  = FFT_IN_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [P_LANES-1:0][P_SAMP_W-1:0]   in_samp,
  output logic [P_LANES-1:0]                 out_valid,
  output logic [P_LANES-1:0][$clog2(P_NFFT)-1:0] out_idx,
  output logic [P_LANES-1:0][P_OUT_W-1:0]    out_samp
);
  localparam int unsigned WORDS = P_NFFT / P_LANES;   // words per frame
  localparam int unsigned LB    = $clog2(P_LANES);
  localparam int unsigned WB    = $clog2(WORDS);
  localparam int unsigned IB    = $clog2(P_NFFT);

  // mem[buffer][bank][word]
  logic [P_SAMP_W-1:0] mem [P_LANES][P_LANES][WORDS];

  logic [LB-1:0] wbuf;                 // buffer being written
  logic [WB-1:0] wword;                // word within that buffer
  logic [P_LANES-1:0]          rd_act; // buffer has been started
  logic [P_LANES-1:0][IB-1:0]  rd_cnt; // next serial sample to read

  // write side
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < P_LANES; j++)
        mem[wbuf][j][wword] <= in_samp[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf  <= '0;
      wword <= '0;
    end else if (in_valid) begin
      wword <= wword + 1'b1;
      if (wword == WB'(WORDS - 1))
        wbuf <= (wbuf == LB'(P_LANES - 1)) ? '0 : wbuf + 1'b1;
    end
  end

  // read side, one serial reader per buffer
  for (genvar b = 0; b < P_LANES; b++) begin : g_buf
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_act[b] <= 1'b0;
        rd_cnt[b] <= '0;
      end else if (in_valid) begin
        if (wbuf == LB'(b) && wword == '0) begin
          rd_act[b] <= 1'b1;          // first word of a new frame written now
          rd_cnt[b] <= '0;
        end else if (rd_act[b]) begin
          rd_cnt[b] <= rd_cnt[b] + 1'b1;
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[b] <= 1'b0;
        out_idx[b]   <= '0;
        out_samp[b]  <= '0;
      end else begin
        out_valid[b] <= in_valid && rd_act[b];
        if (in_valid && rd_act[b]) begin
          out_idx[b]  <= rd_cnt[b];
          out_samp[b] <= P_OUT_W'(mem[b][rd_cnt[b][LB-1:0]][rd_cnt[b][IB-1:LB]]);
        end
      end
    end
  end

endmodule
