// tb_eq_params: self-checking test of the equalizer weight computation with
// 16 channels (full-size number formats). A behavioural model of the lane
// sum answers each channel request two clocks later from a table of
// integrated spectra. The table holds large and small values (so that |Z|
// needs normalising), channels outside the window, a DC channel with tiny
// |Z|, a channel with |X|^2 <= 0 and one whose gain saturates. The
// reference weights are computed here in floating point:
//   Gx = sqrt(Pmax/|X|^2) * 2^12, cos = Zr/|Z| * 2^16, W = ch==0 || 4|Z| > max|Z|
// and compared, times W, with what is written to the latch (within 2 LSB).
module tb_eq_params;
  import polconv_pkg::*;
  localparam int NC = 16, CB = $clog2(NC);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic req, res_valid = 0;
  logic [CB-1:0] req_ch;
  logic signed [SUM_W-1:0] res [4];
  logic wr_en, wr_w;
  logic [CB-1:0] wr_ch;
  logic [GAIN_W-1:0] wr_gxw, wr_gyw;
  logic signed [ROT_W-1:0] wr_cosw, wr_sinw;
  logic [SUM_W-1:0] pmax, max_mag;

  eq_params #(.P_NCH(NC)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint px [NC], py [NC], zr [NC], zi [NC];
  bit written [NC];
  int got_gx [NC], got_gy [NC], got_cos [NC], got_sin [NC];
  bit got_w [NC];
  int cycle = 0, start_cycle, done_cycle;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  function automatic bit near(input real got, input real exp, input real tol);
    return (got - exp <= tol) && (exp - got <= tol);
  endfunction

  // lane-sum model: answer two clocks after a request
  logic [CB-1:0] q1, q2;
  logic r1, r2;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    r1 <= req; q1 <= req_ch;
    r2 <= r1;  q2 <= q1;
  end
  always_comb begin
    res_valid = r2;
    res[0] = SUM_W'(px[q2]);
    res[1] = SUM_W'(py[q2]);
    res[2] = SUM_W'(zr[q2]);
    res[3] = SUM_W'(zi[q2]);
  end

  always @(posedge clk) if (wr_en) begin
    check(!written[wr_ch], "each channel written once");
    written[wr_ch] = 1;
    got_gx[wr_ch] = int'(wr_gxw);  got_gy[wr_ch] = int'(wr_gyw);
    got_cos[wr_ch] = int'(wr_cosw); got_sin[wr_ch] = int'(wr_sinw);
    got_w[wr_ch] = wr_w;
  end

  initial begin
    real scale, ang, mag, maxz, pm, ex, ez [NC];
    bit ew;
    for (int c = 0; c < NC; c++) begin
      scale = (c % 2 == 0) ? 1.0e17 : 3.0e14;            // > 2^31: normalisation
      mag = scale * (0.3 + 0.7 * real'($urandom_range(0, 1000)) / 1000.0);
      if (c == 3 || c == 9 || c == 14) mag = scale * 0.01;  // outside the window
      if (c == 0) mag = 1.0e6;                              // DC: tiny but kept
      ang = 6.2831853 * real'($urandom_range(0, 999)) / 1000.0;
      zr[c] = longint'(mag * $cos(ang));
      zi[c] = longint'(mag * $sin(ang));
      px[c] = longint'(scale * (1.0 + real'($urandom_range(0, 1000)) / 100.0));
      py[c] = longint'(scale * (1.0 + real'($urandom_range(0, 1000)) / 100.0));
    end
    px[5] = -12345;          // on - off below zero: gain 0
    py[7] = 1000;            // gain far above range: saturates
    // the odd (small-scale) channels must stay in the window: lift their |Z|
    for (int c = 1; c < NC; c += 2) if (c != 3 && c != 9) begin
      zr[c] *= 400; zi[c] *= 400;
    end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); start <= 1; start_cycle = cycle + 1;
    @(posedge clk); start <= 0;
    wait (done);
    done_cycle = cycle;
    @(posedge clk);

    // reference
    pm = 0; maxz = 0;
    for (int c = 0; c < NC; c++) begin
      if (real'(px[c]) > pm) pm = real'(px[c]);
      if (real'(py[c]) > pm) pm = real'(py[c]);
      ez[c] = $sqrt(real'(zr[c]) * real'(zr[c]) + real'(zi[c]) * real'(zi[c]));
      if (ez[c] > maxz) maxz = ez[c];
    end
    check(near(real'(pmax), pm, 1.0), "Pmax");
    check(near(real'(max_mag) / maxz, 1.0, 1.0e-8), "max |Z|");
    for (int c = 0; c < NC; c++) begin
      real egx, egy, ec, es;
      ew = (c == 0) || (4.0 * ez[c] > maxz);
      egx = (px[c] <= 0) ? 0.0 : $sqrt(pm / real'(px[c])) * 4096.0;
      egy = (py[c] <= 0) ? 0.0 : $sqrt(pm / real'(py[c])) * 4096.0;
      if (egx > 262143.0) egx = 262143.0;
      if (egy > 262143.0) egy = 262143.0;
      ec = real'(zr[c]) / ez[c] * 65536.0;
      es = real'(zi[c]) / ez[c] * 65536.0;
      if (!ew) begin egx = 0; egy = 0; ec = 0; es = 0; end
      check(written[c], $sformatf("ch %0d written", c));
      check(got_w[c] == ew, $sformatf("ch %0d window %0b exp %0b", c, got_w[c], ew));
      check(near(real'(got_gx[c]), egx, 2.0), $sformatf("ch %0d Gx %0d exp %f", c, got_gx[c], egx));
      check(near(real'(got_gy[c]), egy, 2.0), $sformatf("ch %0d Gy %0d exp %f", c, got_gy[c], egy));
      check(near(real'(got_cos[c]), ec, 2.0), $sformatf("ch %0d cos %0d exp %f", c, got_cos[c], ec));
      check(near(real'(got_sin[c]), es, 2.0), $sformatf("ch %0d sin %0d exp %f", c, got_sin[c], es));
    end
    check(got_w[3] == 0 && got_w[0] == 1, "window excludes weak channels, keeps DC");
    check(!busy, "idle after done");
    $display("eq_params: %0d clocks for %0d channels", done_cycle - start_cycle, NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
