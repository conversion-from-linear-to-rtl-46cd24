// seq_isqrt: sequential integer square root, one result bit per clock.
//
// root = floor(sqrt(radicand)) for a W-bit radicand (W even), by the
// digit-by-digit method: a trial bit walks from the top pair of bits down,
// and is kept when the remaining radicand covers it. A start pulse loads the
// radicand; W/2 clocks later done pulses for one clock and root holds the
// result until the next start. Used by the equalizer weight computation in
// place of a floating-point square root core.
module seq_isqrt #(
  parameter int unsigned W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   radicand,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  localparam int unsigned CW = $clog2(W / 2 + 1);

  logic [W-1:0]  op, res, one;
  logic [CW-1:0] cnt;
  logic [W-1:0]  trial;

  assign trial = res + one;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op   <= '0;
      res  <= '0;
      one  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        op   <= radicand;
        res  <= '0;
        one  <= W'(1) << (W - 2);
        cnt  <= CW'(W / 2);
        busy <= 1'b1;
      end else if (busy) begin
        if (op >= trial) begin
          op  <= op - trial;
          res <= (res >> 1) + one;
        end else begin
          res <= res >> 1;
        end
        one <= one >> 2;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign root = res[W/2-1:0];

endmodule
