// masked_and: AND gate on two-share Boolean-masked operands.
//
// With x = x1 ^ x2 and y = y1 ^ y2 the outputs satisfy z1 ^ z2 = x & y:
//   z1 = (x1 & y1) ^ (x1 | ~y2)
//   z2 = (x2 | ~y2) ^ (x2 & y1)
// (expand a | b = a ^ b ^ ab: the two OR terms together give (x1^x2)&y2, the
// two AND terms (x1^x2)&y1). No fresh randomness is used; the gate is purely
// combinational. These are the compact masking expressions the chip uses for
// every non-linear gate of its masked cores; the gate structure follows the
// chip's schematic of the masked AND.
module masked_and (
  input  logic x1,
  input  logic x2,
  input  logic y1,
  input  logic y2,
  output logic z1,
  output logic z2
);
  logic ny2;
  assign ny2 = ~y2;
  assign z1  = (x1 & y1) ^ (x1 | ny2);
  assign z2  = (x2 | ny2) ^ (x2 & y1);
endmodule
