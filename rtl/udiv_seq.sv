// udiv_seq -- sequential restoring unsigned divider.
//
// Computes quot = numer / denom and rem = numer % denom one quotient bit per clock, MSB
// first, so a division takes W cycles after `start`. `done` pulses for one cycle with the
// result, which then stays on quot/rem until the next start. A zero divisor gives
// quot = all ones and rem = numer (the natural result of the restoring algorithm).
// The frequency controller uses it for the two divisions of the adaptive-sampling rule;
// it is a helper of this implementation, not a block described on its own.
module udiv_seq #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] numer,
  input  logic [W-1:0] denom,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot,
  output logic [W-1:0] rem
);
  logic [W-1:0]         dvsr;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  always_comb trial = {rem, quot[W-1]} - {1'b0, dvsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      quot <= '0;
      rem  <= '0;
      dvsr <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        quot <= numer;      // dividend shifts out of quot while quotient bits shift in
        rem  <= '0;
        dvsr <= denom;
        cnt  <= W[$clog2(W+1)-1:0];
      end else if (busy) begin
        if (!trial[W]) begin
          rem  <= trial[W-1:0];
          quot <= {quot[W-2:0], 1'b1};
        end else begin
          rem  <= {rem[W-2:0], quot[W-1]};
          quot <= {quot[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
