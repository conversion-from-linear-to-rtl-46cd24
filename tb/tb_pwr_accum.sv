// tb_pwr_accum: self-checking test of one lane's calibration accumulator,
// with 16 channels per frame (the widths are the full-size ones). Frames of
// random X, Y spectra stream in; a start pulse arrives in the middle of a
// frame, int_frames = 6 frames are accumulated with the noise diode state
// changing from frame to frame, and further frames follow after done. Two
// shorter runs follow, the last with the diode on only, where the unused off
// bank must read as zero. The
// test keeps its own sums of |X|^2, |Y|^2, Re(XY*) and Im(XY*) per bank and
// channel and compares them through the read port (one clock latency).
module tb_pwr_accum;
  import polconv_pkg::*;
  localparam int NC = 16;
  localparam int CB = $clog2(NC);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [CB-1:0] in_ch = '0;
  logic signed [SPEC_W-1:0] in_xr = '0, in_xi = '0, in_yr = '0, in_yi = '0;
  logic start = 0, diode_on = 0, busy, done, rd_en = 0;
  logic [INT_LOG2:0] int_frames = 6;
  logic [CB-1:0] rd_ch = '0;
  logic signed [ACC_W-1:0] rd_data [4][2];

  pwr_accum #(.P_NCH(NC)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0] model [4][2][NC];
  bit used [2];
  int frames_taken = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic signed [ACC_W-1:0] ext(input longint v);
    return ACC_W'(v);
  endfunction

  // one frame; 'count' says whether the model should take it, bank = diode
  task automatic send_frame(input bit count, input bit dio);
    bit first_in_bank;
    first_in_bank = !used[dio];
    for (int c = 0; c < NC; c++) begin
      longint xr, xi, yr, yi;
      xr = longint'($urandom_range(0, 4000000)) - 2000000;
      xi = longint'($urandom_range(0, 4000000)) - 2000000;
      yr = longint'($urandom_range(0, 4000000)) - 2000000;
      yi = longint'($urandom_range(0, 4000000)) - 2000000;
      @(posedge clk);
      in_valid <= 1; in_ch <= CB'(c);
      in_xr <= SPEC_W'(xr); in_xi <= SPEC_W'(xi); in_yr <= SPEC_W'(yr); in_yi <= SPEC_W'(yi);
      if (c == 0) diode_on <= dio;
      if (count) begin
        logic signed [ACC_W-1:0] p [4];
        p[0] = ext(xr * xr + xi * xi);
        p[1] = ext(yr * yr + yi * yi);
        p[2] = ext(xr * yr + xi * yi);
        p[3] = ext(xi * yr - xr * yi);
        for (int q = 0; q < 4; q++)
          model[q][dio][c] = first_in_bank ? p[q] : model[q][dio][c] + p[q];
      end
    end
    if (count) begin used[dio] = 1; frames_taken++; end
    @(posedge clk);
    in_valid <= 0;
    diode_on <= $urandom_range(0, 1);   // changes between frames only matter at ch 0
    repeat ($urandom_range(0, 5)) @(posedge clk);
  endtask

  initial begin
    bit dio_seq [6] = '{1, 0, 1, 1, 0, 0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // frames before start are ignored
    send_frame(0, 1);
    // start in the middle of a frame: that frame is not taken
    fork
      send_frame(0, 0);
      begin repeat (5) @(posedge clk); start <= 1; @(posedge clk); start <= 0; end
    join
    check(busy && !done, "busy after start");
    for (int f = 0; f < 6; f++) begin
      send_frame(1, dio_seq[f]);
      if (f < 5) check(!done, $sformatf("not done after %0d frames", f + 1));
    end
    repeat (2) @(posedge clk);
    check(done && !busy, "done after int_frames frames");
    // frames after done are ignored
    send_frame(0, 1);
    send_frame(0, 0);
    repeat (3) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      @(posedge clk); rd_en <= 1; rd_ch <= CB'(c);
      @(posedge clk); rd_en <= 0;
      @(negedge clk);
      for (int q = 0; q < 4; q++)
        for (int b = 0; b < 2; b++)
          check(rd_data[q][b] == model[q][b][c],
                $sformatf("ch %0d q %0d bank %0d: got %0d exp %0d", c, q, b, rd_data[q][b], model[q][b][c]));
    end
    // a second run restarts both banks from scratch
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    used[0] = 0; used[1] = 0;
    int_frames <= 2;
    send_frame(1, 1);
    send_frame(1, 0);
    repeat (2) @(posedge clk);
    check(done, "second run done");
    for (int c = 0; c < NC; c++) begin
      @(posedge clk); rd_en <= 1; rd_ch <= CB'(c);
      @(posedge clk); rd_en <= 0;
      @(negedge clk);
      for (int q = 0; q < 4; q++)
        for (int b = 0; b < 2; b++)
          check(rd_data[q][b] == model[q][b][c],
                $sformatf("run 2 ch %0d q %0d bank %0d", c, q, b));
    end
    // a third run with the diode on only: the off bank must read as zero
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    used[0] = 0; used[1] = 0;
    for (int q = 0; q < 4; q++)
      for (int c = 0; c < NC; c++) model[q][0][c] = '0;
    send_frame(1, 1);
    send_frame(1, 1);
    repeat (2) @(posedge clk);
    check(done, "third run done");
    for (int c = 0; c < NC; c++) begin
      @(posedge clk); rd_en <= 1; rd_ch <= CB'(c);
      @(posedge clk); rd_en <= 0;
      @(negedge clk);
      for (int q = 0; q < 4; q++)
        for (int b = 0; b < 2; b++)
          check(rd_data[q][b] == model[q][b][c],
                $sformatf("run 3 ch %0d q %0d bank %0d", c, q, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
