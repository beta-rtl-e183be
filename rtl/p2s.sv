// p2s: parallel to serial converter between the compute buffer and the DPUs.
//
// The compute buffer delivers whole tiles in parallel: one entry of J packed
// activation words and one operand entry of N x J elements of 8 bits. The
// DPUs consume the second operand one bit-plane at a time. This stage
// registers the activation words and selects bit `plane` of every operand
// element, giving each DPU n a J-bit vector w[n]. Stepping `plane` from the
// most significant used bit down to bit 0 over successive cycles traverses a
// multi-bit operand serially; binary weights use plane 0 only.
// The control bits first/dbl/last travel with the data.
// Timing: one register stage; outputs appear the cycle after in_valid.
// The paper names the block and its place; the plane-select form is this
// design's choice.
module p2s
  import beta_pkg::*;
#(
  parameter int unsigned N = 2,
  parameter int unsigned J = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_dbl,
  input  logic             in_last,
  input  logic [2:0]       plane,
  input  logic [J*8-1:0]   x_line,
  input  logic [N*J*8-1:0] b_line,
  output logic             out_valid,
  output logic             out_first,
  output logic             out_dbl,
  output logic             out_last,
  output logic [PE_W-1:0]  x [J],
  output logic [J-1:0]     w [N]
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_dbl   <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_dbl   <= in_dbl;
      out_last  <= in_last;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < int'(J); j++) begin
        x[j] <= x_line[j*8 +: 8];
        for (int n = 0; n < int'(N); n++) begin
          w[n][j] <= b_line[(n*J + j)*8 + int'(plane)];
        end
      end
    end
  end
endmodule
