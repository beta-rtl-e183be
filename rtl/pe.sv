// pe: one processing element of the PE sequence.
//
// The PE holds one 8-bit packed activation word X and one bit of the second
// operand W. Its output is the bitwise AND of X with W replicated: eight AND
// gates, one per bit of the word. Because every sub-word of X is multiplied by
// the same bit, the 8-bit output carries 1, 2, 4 or 8 packed products
// (8b x 1b, 4b x 1b, 2b x 1b or 1b x 1b) without any mode input; how the output
// bits are grouped is decided later by the crossbar of the dot product unit.
// Purely combinational. The AND-gate array follows the paper's figure of the
// PE operating modes.
module pe
  import beta_pkg::*;
(
  input  logic [PE_W-1:0] x,   // packed activation word
  input  logic            w,   // binary weight bit or one bit of an activation
  output logic [PE_W-1:0] y    // packed partial products
);
  assign y = x & {PE_W{w}};
endmodule
