// rng_xor_net: static XOR network that derives the RNG's output bits from the
// LFSR and CASR states.
//
// Output k (k = 0 .. N_OUT-1) is the XOR of one LFSR stage and one CASR cell:
//   rnd[k] = lfsr[(A_L*k + B_L) mod 43] ^ casr[(A_C*k + B_C) mod 37]
// (0-based state indices). Because A_L is invertible mod 43, A_C mod 37, and
// 43 and 37 are coprime, no two outputs k < 1591 = 43*37 use the same pair;
// 1591 is the most outputs two-input XORs allow. The chip wires 243 outputs
// with pairs drawn at random at design time; the affine formula here is this
// design's stand-in for that random draw (pairs are fixed by the parameters
// and unique, but not the chip's pairs). Purely combinational.
module rng_xor_net #(
  parameter int unsigned LFSR_N = 43,
  parameter int unsigned CASR_N = 37,
  parameter int unsigned N_OUT  = 243,
  parameter int unsigned A_L    = 7,
  parameter int unsigned B_L    = 40,
  parameter int unsigned A_C    = 11,
  parameter int unsigned B_C    = 0
) (
  input  logic [LFSR_N-1:0] lfsr,
  input  logic [CASR_N-1:0] casr,
  output logic [N_OUT-1:0]  rnd
);
  for (genvar k = 0; k < int'(N_OUT); k++) begin : g_xor
    localparam int unsigned LI = (A_L * k + B_L) % LFSR_N;
    localparam int unsigned CI = (A_C * k + B_C) % CASR_N;
    assign rnd[k] = lfsr[LI] ^ casr[CI];
  end
endmodule
