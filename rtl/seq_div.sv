// seq_div: sequential unsigned restoring divider, one quotient bit per clock.
//
// quotient = dividend / divisor (truncated) and remainder, for W-bit
// operands. A start pulse loads the operands; W clocks later done pulses for
// one clock and quotient/remainder hold the result until the next start.
// Division by zero returns an all-ones quotient. Used by the equalizer weight
// computation in place of a floating-point divider core.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W:0]    rem;
  logic [W-1:0]  q, d;
  logic [CW-1:0] cnt;
  logic [W:0]    rem_sh;

  assign rem_sh = {rem[W-1:0], q[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      q    <= '0;
      d    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        q    <= dividend;
        d    <= divisor;
        cnt  <= CW'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (rem_sh >= {1'b0, d}) begin
          rem <= rem_sh - {1'b0, d};
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient  = q;
  assign remainder = rem[W-1:0];

endmodule
