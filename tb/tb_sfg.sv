// tb_sfg: self-checking test of the serial frame generator at full size
// (8 lanes, 1024-sample frames). Random samples are written 8 per clock; the
// test keeps every sample and checks that lane b streams frames b, b+8, ...
// sample by sample, that sample 0 of each frame leaves two clocks after the
// word that carried it, that every lane streams without gaps once started,
// and that input gaps (in_valid low) do not disturb the frames.
module tb_sfg;
  import polconv_pkg::*;
  localparam int L = LANES, N = NFFT, W = N / L;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [L-1:0][SAMP_W-1:0] in_samp;
  logic [L-1:0] out_valid;
  logic [L-1:0][$clog2(N)-1:0] out_idx;
  logic [L-1:0][FFT_IN_W-1:0] out_samp;

  sfg dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [SAMP_W-1:0] hist [int];   // global sample index -> value
  int words_in = 0;
  int word_cycle [int];            // word number -> cycle it was written
  int cycle = 0;
  int lane_frame [L];              // frame currently streamed by each lane
  int lane_seen  [L];
  bit gaps = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // stimulus
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      in_valid <= gaps ? ($urandom_range(0, 9) != 0) : 1'b1;
    end
  end
  always @(posedge clk) if (rst_n && in_valid) begin
    for (int j = 0; j < L; j++) hist[words_in * L + j] = in_samp[j];
    word_cycle[words_in] = cycle;
    words_in++;
    for (int j = 0; j < L; j++) in_samp[j] <= SAMP_W'($urandom);
  end

  // checker
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < L; b++) if (out_valid[b]) begin
      int k, f, g;
      k = int'(out_idx[b]);
      if (k == 0) begin
        lane_frame[b] = (lane_seen[b] == 0) ? b : lane_frame[b] + L;
        lane_seen[b]++;
        if (!gaps) check(cycle == word_cycle[lane_frame[b] * W] + 2,
                         $sformatf("lane %0d frame start latency", b));
      end
      f = lane_frame[b];
      g = f * N + k;
      check(hist.exists(g) && out_samp[b] == {1'b0, hist[g]},
            $sformatf("lane %0d frame %0d sample %0d: got %0d", b, f, k, out_samp[b]));
    end
    // no gaps in a lane once started, while the input is continuous
    if (!gaps && words_in > L * W + 4)
      check(out_valid == '1, "all lanes stream continuously");
  end

  initial begin
    for (int j = 0; j < L; j++) in_samp[j] = SAMP_W'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (W * L * 4) @(posedge clk);
    gaps = 1;
    repeat (W * L * 4) @(posedge clk);
    for (int b = 0; b < L; b++) check(lane_seen[b] >= 6, $sformatf("lane %0d frames", b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
