// comp42: a W-bit row of 4:2 compressors.
//
// Each bit position is the 4:2 compressor cell of the paper's DPU figure:
// four XOR gates and two multiplexers. With t1 = a^b, t2 = c^d and t = t1^t2,
//   sum   = t ^ cin
//   carry = t ? cin : d
//   cout  = t1 ? c : a
// The cout of bit i is the cin of bit i+1 (bit 0 takes cin = 0), so the row adds
// four W-bit operands into two: a + b + c + d = s + co (mod 2^W), where co is
// the carry vector already shifted to its weight. The cell's gate structure is
// the paper's; linking the cells into a row this way is the standard use of it.
// Purely combinational.
module comp42 #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  output logic [W-1:0] s,    // sum vector
  output logic [W-1:0] co    // carry vector, weight already applied
);
  // The top bit of cout and carry would carry weight 2^W and is dropped:
  // the row works modulo 2^W.
  logic [W-1:0] t1, t2, t, cout, cin, carry;

  assign t1   = a ^ b;
  assign t2   = c ^ d;
  assign t    = t1 ^ t2;
  assign cout = (t1 & c) | (~t1 & a);
  assign cin  = {cout[W-2:0], 1'b0};
  assign s    = t ^ cin;
  assign carry = (t & cin) | (~t & d);
  assign co   = {carry[W-2:0], 1'b0};
endmodule
