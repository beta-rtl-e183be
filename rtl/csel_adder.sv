// csel_adder: carry select adder, W bits, blocks of BLK bits.
//
// Every block computes its sum twice, once for a carry-in of 0 and once for 1,
// in parallel; the real carry coming out of the block below then selects one
// of the two results. The delay is one block add plus one multiplexer per
// block instead of a ripple through all W bits. Used after the compressor tree
// loop to turn the final sum/carry pair into the dot product result.
// Purely combinational; result is modulo 2^W. The paper names the adder; the
// block size is this design's choice.
module csel_adder #(
  parameter int unsigned W   = 32,
  parameter int unsigned BLK = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] sum
);
  localparam int unsigned NB = (W + BLK - 1) / BLK;
  localparam int unsigned WP = NB * BLK;

  logic [WP-1:0] ap, bp, sp;
  logic [NB:0]   cy;

  assign ap = WP'(a);
  assign bp = WP'(b);
  assign cy[0] = 1'b0;

  for (genvar i = 0; i < NB; i++) begin : g_blk
    logic [BLK:0] s0, s1;
    assign s0 = {1'b0, ap[i*BLK +: BLK]} + {1'b0, bp[i*BLK +: BLK]};
    assign s1 = {1'b0, ap[i*BLK +: BLK]} + {1'b0, bp[i*BLK +: BLK]} + (BLK+1)'(1);
    assign sp[i*BLK +: BLK] = cy[i] ? s1[BLK-1:0] : s0[BLK-1:0];
    assign cy[i+1]          = cy[i] ? s1[BLK]     : s0[BLK];
  end

  assign sum = sp[W-1:0];
endmodule
