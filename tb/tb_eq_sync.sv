// tb_eq_sync: self-checking test of the synchronization stage at full size
// (8 lanes, 512 channels). Each lane streams random channels with random
// data; behavioural latches answer each lane's channel address one clock
// later with weights that are a known function of the channel. Every output
// must carry its own data together with the weights of its own channel, one
// clock after the input, and nothing may pass while obs_en is low.
module tb_eq_sync;
  import polconv_pkg::*;
  localparam int L = LANES, CB = $clog2(NCH);

  logic clk = 0, rst_n = 0, obs_en = 0;
  logic [L-1:0] in_valid = '0;
  logic [L-1:0][CB-1:0] in_ch = '0;
  logic signed [SPEC_W-1:0] in_xr [L], in_xi [L], in_yr [L], in_yi [L];
  logic [L-1:0][CB-1:0] lat_rd_ch;
  logic [L-1:0][2*GAIN_W-1:0] lat_gain;
  logic [L-1:0][2*ROT_W-1:0] lat_rot;
  logic [L-1:0] out_valid;
  logic [L-1:0][CB-1:0] out_ch;
  logic signed [SPEC_W-1:0] out_xr [L], out_xi [L], out_yr [L], out_yi [L];
  weights_t [L-1:0] out_w;

  eq_sync dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, passed = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [2*GAIN_W-1:0] gain_of(input logic [CB-1:0] c);
    return {GAIN_W'(c * 7 + 1), GAIN_W'(c * 3 + 5)};
  endfunction
  function automatic logic [2*ROT_W-1:0] rot_of(input logic [CB-1:0] c);
    return {ROT_W'(c * 11 + 2), ROT_W'(-(c * 13) - 1)};
  endfunction

  // behavioural latches: registered read
  always @(posedge clk)
    for (int l = 0; l < L; l++) begin
      lat_gain[l] <= gain_of(lat_rd_ch[l]);
      lat_rot[l]  <= rot_of(lat_rd_ch[l]);
    end

  // expected outputs, one clock behind the inputs
  logic [L-1:0] e_v;
  logic [L-1:0][CB-1:0] e_ch;
  logic signed [SPEC_W-1:0] e_x [L];

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      obs_en <= (n >= 200);
      for (int l = 0; l < L; l++) begin
        in_valid[l] <= $urandom_range(0, 3) != 0;
        in_ch[l] <= CB'($urandom);
        in_xr[l] <= SPEC_W'($urandom); in_xi[l] <= SPEC_W'($urandom);
        in_yr[l] <= SPEC_W'($urandom); in_yi[l] <= SPEC_W'($urandom);
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        e_v[l] = in_valid[l] && obs_en; e_ch[l] = in_ch[l]; e_x[l] = in_xr[l] ^ in_yi[l];
      end
      @(posedge clk);
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        check(out_valid[l] == e_v[l], $sformatf("lane %0d valid", l));
        if (e_v[l]) begin
          passed++;
          check(out_ch[l] == e_ch[l] && (out_xr[l] ^ out_yi[l]) == e_x[l],
                $sformatf("lane %0d data", l));
          check({out_w[l].gxw, out_w[l].gyw} == gain_of(e_ch[l]) &&
                {out_w[l].cosw, out_w[l].sinw} == rot_of(e_ch[l]),
                $sformatf("lane %0d ch %0d weights", l, e_ch[l]));
        end
      end
    end
    check(passed > 1000, "enough channels passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
