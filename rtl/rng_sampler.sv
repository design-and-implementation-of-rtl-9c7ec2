// rng_sampler: samples the free-running RNG ring oscillator and filters
// metastability.
//
// ro_in is the (asynchronous) output of the entropy oscillator, after its
// divider. In every system clock cycle where sample_tick is high the sampling
// register captures ro_in; two further flip-flops on the system clock form
// the metastability filter. raw_valid pulses for one cycle when the filtered
// bit raw_bit is a new sample (three cycles after the tick). The sampling
// rate, and with it the entropy per bit, is set by the divider that produces
// sample_tick.
//
// The sampling register and the two-stage filter on the system clock follow
// the chip. There the sampling register is clocked by a divided sample clock;
// here it is a system-clock register enabled by the divider's tick, which
// samples at the same instants and keeps a single clock domain.
module rng_sampler (
  input  logic clk,
  input  logic rst_n,
  input  logic ro_in,
  input  logic sample_tick,
  output logic raw_bit,
  output logic raw_valid
);
  logic smp, meta1;
  logic v0, v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      smp       <= 1'b0;
      meta1     <= 1'b0;
      raw_bit   <= 1'b0;
      v0        <= 1'b0;
      v1        <= 1'b0;
      raw_valid <= 1'b0;
    end else begin
      if (sample_tick) smp <= ro_in;
      meta1     <= smp;
      raw_bit   <= meta1;
      v0        <= sample_tick;
      v1        <= v0;
      raw_valid <= v1;
    end
  end
endmodule
