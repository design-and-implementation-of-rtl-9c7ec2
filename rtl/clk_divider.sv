// clk_divider: programmable integer clock divider, ratio 2 to 256.
//
// The divided clock clk_out has period N input clocks with N = div + 1
// (div = 0 is taken as 1, so N is 2..256). It is high for the first
// floor(N/2) input cycles of each period and comes straight from a
// flip-flop, so it is free of glitches. tick is a one-cycle pulse in the
// input clock domain in the cycle where clk_out rises, for logic that
// samples at the divided rate without a second clock domain. A new div
// takes effect at the next period boundary or earlier if the count is past
// the new end. The chip uses such dividers for the system clock, the RNG
// sampling clock and the RNG oscillator test output; the 2..256 range
// follows the chip, the counter structure is this design's own.
module clk_divider #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] div,
  output logic         clk_out,
  output logic         tick
);
  logic [W-1:0] cnt, cnt_nx, last;
  logic [W-1:0] half;

  assign last   = (div == '0) ? W'(1) : div;           // N - 1
  assign half   = W'(({1'b0, last} + 1'b1) >> 1);      // floor(N / 2)
  assign cnt_nx = (cnt >= last) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      clk_out <= 1'b0;
      tick    <= 1'b0;
    end else begin
      cnt     <= cnt_nx;
      clk_out <= (cnt_nx < half);
      tick    <= (cnt_nx == '0);
    end
  end
endmodule
