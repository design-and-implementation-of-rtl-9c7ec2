// rng_postproc: RNG post-processing, a 43-stage LFSR and a 37-cell hybrid
// cellular-automaton shift register (CASR) running on the system clock.
//
// LFSR: XNOR form, x^43 + x^42 + x^38 + x^37 + 1, feedback XNOR of stages 43,
// 42, 38 and 37 into stage 1, period 2^43 - 1 (all ones excluded).
// CASR: cells 1..37 with null boundaries; every cell follows rule 90,
// a_i <= a_(i-1) ^ a_(i+1), except cell 9, which follows rule 150,
// a_i <= a_(i-1) ^ a_i ^ a_(i+1); period 2^37 - 1 (all zeros excluded).
// The two periods are coprime, so the pair repeats after about 2^80 cycles.
// Both registers update every cycle. When a new raw bit arrives (raw_valid)
// it is XORed into the LFSR feedback and into the next values of CASR cells
// 1 and 37.
//
// Power-on init: from reset until 80 raw bits have arrived, the LFSR and the
// CASR form one 80-bit shift register (raw bit -> LFSR stage 1 ... stage 43
// -> CASR cell 1 ... cell 37) that advances only on raw_valid; ready then
// rises and normal operation starts.
//
// Polynomial, CA rules, rule-150 position, perturbation points and
// initialisation from raw bits follow the chip; the serial init chain, its
// length and the ready flag are this design's own. The state outputs use
// index i-1 for stage/cell i.
module rng_postproc #(
  parameter int unsigned LFSR_N  = 43,
  parameter int unsigned CASR_N  = 37,
  parameter int unsigned RULE150 = 9      // 1-based cell using rule 150
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              raw_bit,
  input  logic              raw_valid,
  output logic [LFSR_N-1:0] lfsr,
  output logic [CASR_N-1:0] casr,
  output logic              ready
);
  localparam int unsigned INIT_BITS = LFSR_N + CASR_N;

  logic [$clog2(INIT_BITS+1)-1:0] init_cnt;
  logic              p;
  logic              fb;
  logic [LFSR_N-1:0] l_nx;
  logic [CASR_N-1:0] c_nx;

  assign p  = raw_valid & raw_bit;
  assign fb = ~(lfsr[42] ^ lfsr[41] ^ lfsr[37] ^ lfsr[36]);

  always_comb begin
    l_nx = {lfsr[LFSR_N-2:0], fb ^ p};
    for (int i = 0; i < int'(CASR_N); i++) begin
      logic left, right;
      left    = (i == 0)               ? 1'b0 : casr[i-1];
      right   = (i == int'(CASR_N) - 1) ? 1'b0 : casr[i+1];
      c_nx[i] = left ^ right ^ ((i == int'(RULE150) - 1) ? casr[i] : 1'b0);
    end
    c_nx[0]        = c_nx[0] ^ p;
    c_nx[CASR_N-1] = c_nx[CASR_N-1] ^ p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr     <= '0;
      casr     <= '0;
      init_cnt <= '0;
      ready    <= 1'b0;
    end else if (!ready) begin
      if (raw_valid) begin
        lfsr     <= {lfsr[LFSR_N-2:0], raw_bit};
        casr     <= {casr[CASR_N-2:0], lfsr[LFSR_N-1]};
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == $bits(init_cnt)'(INIT_BITS - 1)) ready <= 1'b1;
      end
    end else begin
      lfsr <= l_nx;
      casr <= c_nx;
    end
  end
endmodule
