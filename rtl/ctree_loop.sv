// ctree_loop: compressor tree loop, the accumulator of one dot-product lane.
//
// A compressor tree (csa_tree) adds the NIN products of the current cycle
// together with the two accumulated partial results fed back from the loop
// registers, and writes the new pair back into those registers. The
// accumulator stays in carry-save form, so the loop has no carry chain and its
// delay grows only with log2(NIN).
//   first = 1 : the fed-back pair is replaced by zero (a new dot product);
//   dbl   = 1 : the fed-back pair is doubled before the add, which implements
//               the most-significant-bit-first bit-serial traversal of a
//               multi-bit second operand (acc = 2*acc + products).
// Timing: when en is high the registers capture on the rising clock edge; the
// pair (s, c) is valid the cycle after and is added by a carry select adder
// outside. Synchronous active-low reset clears the pair.
// The tree-with-feedback structure is the paper's; the first/dbl controls are
// this design's way of sequencing bit-serial operands and long vectors.
module ctree_loop #(
  parameter int unsigned NIN = 256,
  parameter int unsigned W   = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         first,
  input  logic         dbl,
  input  logic [W-1:0] ops [NIN],
  output logic [W-1:0] s,
  output logic [W-1:0] c
);
  logic [W-1:0] all_ops [NIN+2];
  logic [W-1:0] fb_s, fb_c, nx_s, nx_c;

  always_comb begin
    if (first) begin
      fb_s = '0;
      fb_c = '0;
    end else if (dbl) begin
      fb_s = {s[W-2:0], 1'b0};
      fb_c = {c[W-2:0], 1'b0};
    end else begin
      fb_s = s;
      fb_c = c;
    end
  end

  for (genvar k = 0; k < NIN; k++) begin : g_ops
    assign all_ops[k] = ops[k];
  end
  assign all_ops[NIN]   = fb_s;
  assign all_ops[NIN+1] = fb_c;

  csa_tree #(.NIN(NIN + 2), .W(W)) u_tree (
    .ops(all_ops), .s(nx_s), .c(nx_c)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s <= '0;
      c <= '0;
    end else if (en) begin
      s <= nx_s;
      c <= nx_c;
    end
  end
endmodule
