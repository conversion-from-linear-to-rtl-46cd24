// tb_window_fn: self-checking test of the window rule. A first pass presents
// random |Z| values and the test checks the running maximum; then channels
// are evaluated against a quarter of that maximum (values just above and
// just below the threshold included), and channel 0 must always pass.
module tb_window_fn;
  import polconv_pkg::*;
  localparam int CB = $clog2(NCH);

  logic clk = 0, rst_n = 0, clear = 0, meas_valid = 0;
  logic [SUM_W-1:0] meas_mag = '0, mag = '0, max_mag;
  logic [CB-1:0] ch = '0;
  logic w;

  window_fn dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [SUM_W-1:0] mx;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 3; run++) begin
      @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
      mx = '0;
      for (int n = 0; n < 100; n++) begin
        logic [SUM_W-1:0] v;
        v = SUM_W'({$urandom, $urandom, $urandom}) >> $urandom_range(0, 60);
        if (v > mx) mx = v;
        @(posedge clk); meas_valid <= 1; meas_mag <= v;
      end
      @(posedge clk); meas_valid <= 0;
      @(posedge clk);
      check(max_mag == mx, "running maximum");
      for (int n = 0; n < 200; n++) begin
        logic [SUM_W-1:0] v;
        int c;
        c = $urandom_range(0, NCH - 1);
        case (n % 4)
          0: v = (mx >> 2);                 // exactly a quarter: not above
          1: v = (mx >> 2) + 1;
          default: v = SUM_W'({$urandom, $urandom, $urandom}) % (mx + 1);
        endcase
        ch = CB'(c); mag = v;
        #1;
        check(w == (c == 0 || ((SUM_W+2)'(v) * 4 > (SUM_W+2)'(mx))),
              $sformatf("ch %0d mag %0d max %0d w %0b", c, v, mx, w));
      end
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
