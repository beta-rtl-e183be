// gelu_unit: GELU activation on a stream of FIX-16 values.
//
// Uses GELU(x) ~= x * sigmoid(1.702 x). The factor 1.702 is built from
// shifts (1 + 1/2 + 1/8 + 1/16 + 1/64 = 1.703). The sigmoid is the
// piecewise-linear PLAN approximation, again only shifts and adds:
//   |z| >= 5          : 1
//   2.375 <= |z| < 5  : |z|/32 + 0.84375
//   1 <= |z| < 2.375  : |z|/8  + 0.625
//   |z| < 1           : |z|/4  + 0.5
// and sigmoid(-z) = 1 - sigmoid(z). Absolute error against the exact GELU is
// below 0.07 over the FIX-16 range used by the testbench (|x| < 8).
// Values are Q7.8. One multiplier. Timing: fully pipelined, one value per
// cycle, result one cycle after the input.
// The paper keeps GELU in full precision but does not give its circuit; the
// approximation is this design's choice.
module gelu_unit
  import beta_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic signed [FIX_W-1:0] in_data,
  output logic                    out_valid,
  output logic                    out_last,
  output logic signed [FIX_W-1:0] out_data
);
  logic signed [31:0] x, z, az, sg, p;

  always_comb begin
    x  = 32'(in_data);
    z  = x + (x >>> 1) + (x >>> 3) + (x >>> 4) + (x >>> 6);
    az = (z < 0) ? -z : z;
    if (az >= 32'sd1280)      sg = 32'sd256;                       // 5.0
    else if (az >= 32'sd608)  sg = (az >>> 5) + 32'sd216;          // 2.375, 0.84375
    else if (az >= 32'sd256)  sg = (az >>> 3) + 32'sd160;          // 1.0,   0.625
    else                      sg = (az >>> 2) + 32'sd128;          // 0.5
    if (z < 0) sg = 32'sd256 - sg;
    p = (x * sg) >>> FIX_FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_last;
      if (in_valid) out_data <= sat_fix(64'(p));
    end
  end
endmodule
