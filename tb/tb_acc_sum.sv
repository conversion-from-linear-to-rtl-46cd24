// tb_acc_sum: self-checking test of the on-minus-off lane sum at full size
// (8 lanes). A behavioural model of the lane read ports answers each read
// one clock later with random accumulator contents derived from the channel
// number; the test checks that the sum over lanes of (on - off) for each
// quantity arrives two clocks after the request.
module tb_acc_sum;
  import polconv_pkg::*;
  localparam int L = LANES, CB = $clog2(NCH);

  logic clk = 0, rst_n = 0, req = 0;
  logic [CB-1:0] req_ch = '0;
  logic lane_rd_en;
  logic [CB-1:0] lane_rd_ch;
  logic signed [ACC_W-1:0] lane_data [L][4][2];
  logic res_valid;
  logic signed [SUM_W-1:0] res [4];

  acc_sum dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0] store [NCH][L][4][2];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // lane read ports: registered read
  always @(posedge clk)
    if (lane_rd_en)
      for (int l = 0; l < L; l++)
        for (int q = 0; q < 4; q++)
          for (int b = 0; b < 2; b++)
            lane_data[l][q][b] <= store[lane_rd_ch][l][q][b];

  initial begin
    for (int c = 0; c < NCH; c++)
      for (int l = 0; l < L; l++)
        for (int q = 0; q < 4; q++)
          for (int b = 0; b < 2; b++)
            store[c][l][q][b] = {$urandom, $urandom, $urandom} >>> $urandom_range(0, 40);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 200; n++) begin
      int c;
      logic signed [SUM_W-1:0] e [4];
      c = $urandom_range(0, NCH - 1);
      @(posedge clk); req <= 1; req_ch <= CB'(c);
      @(posedge clk); req <= 0;
      check(!res_valid, "no early result");
      @(posedge clk);
      @(negedge clk);
      check(res_valid, "result two clocks after request");
      for (int q = 0; q < 4; q++) begin
        e[q] = '0;
        for (int l = 0; l < L; l++)
          e[q] += SUM_W'(store[c][l][q][1]) - SUM_W'(store[c][l][q][0]);
        check(res[q] == e[q], $sformatf("ch %0d q %0d got %0d exp %0d", c, q, res[q], e[q]));
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
