// tb_coef_latch: self-checking test of the weight latch at full size (512
// channels, 8 read ports). After reset every channel must read zero; random
// writes follow, and on every clock each port reads a random channel and
// must see, one clock later, the value last written there.
module tb_coef_latch;
  import polconv_pkg::*;
  localparam int L = LANES, CB = $clog2(NCH), DW = 2 * GAIN_W;

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [CB-1:0] wr_ch = '0;
  logic [DW-1:0] wr_data = '0;
  logic [L-1:0][CB-1:0] rd_ch = '0;
  logic [L-1:0][DW-1:0] rd_data;

  coef_latch dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [DW-1:0] model [NCH];
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) model[c] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      logic [L-1:0][CB-1:0] a;
      logic wv;
      logic [CB-1:0] wc;
      logic [DW-1:0] wd;
      for (int p = 0; p < L; p++) a[p] = CB'($urandom);
      wv = (n > 300) && ($urandom_range(0, 1) == 1);
      wc = (n % 3 == 0) ? a[0] : CB'($urandom);
      wd = DW'({$urandom, $urandom});
      @(posedge clk);
      rd_ch <= a; wr_en <= wv; wr_ch <= wc; wr_data <= wd;
      @(posedge clk);                 // write and read happen at this edge
      wr_en <= 0;
      @(negedge clk);
      // a read in the same clock as a write returns the old value
      for (int p = 0; p < L; p++)
        check(rd_data[p] == model[a[p]], $sformatf("port %0d ch %0d (old)", p, a[p]));
      if (wv) model[wc] = wd;
      @(posedge clk);
      @(negedge clk);
      for (int p = 0; p < L; p++)
        check(rd_data[p] == model[a[p]], $sformatf("port %0d ch %0d (new)", p, a[p]));
    end
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
