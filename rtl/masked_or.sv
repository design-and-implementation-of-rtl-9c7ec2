// masked_or: OR gate on two-share Boolean-masked operands.
//
// With x = x1 ^ x2 and y = y1 ^ y2 the outputs satisfy z1 ^ z2 = x | y:
//   z1 = (x1 & y1) ^ (x1 | y2)
//   z2 = (y1 | x2) ^ (x2 & y2)
// (the four terms expand to x1^x2^y1^y2 ^ (x1^x2)(y1^y2) = x ^ y ^ xy).
// Combinational, no fresh randomness. The gate structure follows the chip's
// schematic of the masked OR.
module masked_or (
  input  logic x1,
  input  logic x2,
  input  logic y1,
  input  logic y2,
  output logic z1,
  output logic z2
);
  assign z1 = (x1 & y1) ^ (x1 | y2);
  assign z2 = (y1 | x2) ^ (x2 & y2);
endmodule
