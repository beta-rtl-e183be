// dpu: dot product unit = PE sequence + crossbar + compressor tree loops +
// carry select adders.
//
// Each cycle the unit takes J packed 8-bit activation words x[j] and J single
// bits w[j] (one bit of each element of the second operand) and forms J
// products in the PE sequence. The crossbar splits every PE output into
// 8/b sub-words of b = 8, 4, 2 or 1 bits (set by prec) and routes sub-word l of
// all J PEs to lane l. Lane l's compressor tree loop adds the J sub-words into
// its carry-save accumulator, so one cycle yields 1, 2, 4 or 8 partial sums of
// (b-bit x 1-bit) products: lane l computes the dot product of the l-th packed
// activation vector with the second operand.
// A multi-bit second operand is fed most-significant bit first, one bit per
// cycle (dbl doubles the accumulator first), and vectors longer than J are fed
// in chunks that simply add up (first clears the accumulator).
//
// Interface / timing: in_valid qualifies x, w, first, dbl, last. res[l] is
// valid, with out_valid high, in the cycle after the cycle with last = 1, and
// holds until the next accepted input. Lanes at or above 8/b give zero.
// Results are unsigned (activations are unsigned integers; signs and offsets
// are applied by the vector unit).
// Lane count, packing, J-wide unfolding and the loop follow the paper; the
// MSB-first doubling and first/last controls are this design's choice.
module dpu
  import beta_pkg::*;
#(
  parameter int unsigned J     = 256,  // PEs per DPU (unfolding factor)
  parameter int unsigned ACC_W = 32    // accumulator / result width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  prec_e            prec,
  input  logic             in_valid,
  input  logic             first,
  input  logic             dbl,
  input  logic             last,
  input  logic [PE_W-1:0]  x [J],
  input  logic [J-1:0]     w,
  output logic             out_valid,
  output logic [ACC_W-1:0] res [MAX_LANES]
);
  logic [PE_W-1:0] y [J];

  for (genvar j = 0; j < J; j++) begin : g_pe
    pe u_pe (.x(x[j]), .w(w[j]), .y(y[j]));
  end

  // Crossbar: lane l gets sub-word l of every PE output.
  logic [ACC_W-1:0] lane_ops [MAX_LANES][J];
  for (genvar l = 0; l < MAX_LANES; l++) begin : g_lane
    for (genvar j = 0; j < J; j++) begin : g_xbar
      always_comb begin
        lane_ops[l][j] = '0;
        unique case (prec)
          PREC_A8: if (l == 0) lane_ops[l][j] = ACC_W'(y[j]);
          PREC_A4: if (l < 2)  lane_ops[l][j] = ACC_W'(y[j][(l % 2) * 4 +: 4]);
          PREC_A2: if (l < 4)  lane_ops[l][j] = ACC_W'(y[j][(l % 4) * 2 +: 2]);
          PREC_A1:             lane_ops[l][j] = ACC_W'(y[j][l]);
          default: ;
        endcase
      end
    end

    logic [ACC_W-1:0] s, c;
    ctree_loop #(.NIN(J), .W(ACC_W)) u_loop (
      .clk, .rst_n, .en(in_valid), .first, .dbl,
      .ops(lane_ops[l]), .s, .c
    );
    csel_adder #(.W(ACC_W)) u_csa (.a(s), .b(c), .sum(res[l]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid & last;
  end
endmodule
