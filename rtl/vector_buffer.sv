// vector_buffer: on-chip store of full-precision vectors for the vector unit.
//
// DEPTH entries of VL FIX-16 elements. It holds the fused coefficient and
// offset vectors of the computation flow (for example alpha*beta and
// gamma*beta*colsum(W)) and the vector unit's results.
// Four synchronous read ports (coefficient, offset, operand, host), data the
// cycle after the address, and one write port, shared by the vector unit and
// the host with the vector unit first: the host's write is accepted only when
// host_wr_ready is high.
// The paper names the buffer and its link to the vector unit; the port set
// and depth are this design's choice.
module vector_buffer
  import beta_pkg::*;
#(
  parameter int unsigned VL    = 64,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  // vector unit
  input  logic [AW-1:0]           k_addr,
  output logic signed [FIX_W-1:0] k_data [VL],
  input  logic [AW-1:0]           b_addr,
  output logic signed [FIX_W-1:0] b_data [VL],
  input  logic [AW-1:0]           x_addr,
  output logic signed [FIX_W-1:0] x_data [VL],
  input  logic                    v_wr_en,
  input  logic [AW-1:0]           v_wr_addr,
  input  logic signed [FIX_W-1:0] v_wr_data [VL],
  // host
  input  logic [AW-1:0]           h_rd_addr,
  output logic signed [FIX_W-1:0] h_rd_data [VL],
  input  logic                    h_wr_en,
  input  logic [AW-1:0]           h_wr_addr,
  input  logic signed [FIX_W-1:0] h_wr_data [VL],
  output logic                    host_wr_ready
);
  logic signed [FIX_W-1:0] mem [DEPTH][VL];

  assign host_wr_ready = !v_wr_en;

  always_ff @(posedge clk) begin
    if (v_wr_en)      mem[v_wr_addr] <= v_wr_data;
    else if (h_wr_en) mem[h_wr_addr] <= h_wr_data;
    k_data    <= mem[k_addr];
    b_data    <= mem[b_addr];
    x_data    <= mem[x_addr];
    h_rd_data <= mem[h_rd_addr];
  end
endmodule
