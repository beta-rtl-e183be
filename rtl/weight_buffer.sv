// weight_buffer: on-chip store of binary weights.
//
// Binary weights are written here by the host before inference and copied
// into the compute buffer's operand region before a QMM. One entry holds one
// bit of each of J elements for each of N output columns (N*J bits), the same
// tile the N dot product units consume in one cycle: bit n*J + j is element j
// of column n.
// One write port and one read port, both synchronous; read data appear the
// cycle after rd_en. The paper states the buffer's role; its organisation and
// default depth (one BERT-base layer of binary weights: 7,077,888 bits /
// 512 bits per entry = 13,824 entries) are this design's choice.
module weight_buffer #(
  parameter int unsigned N     = 2,
  parameter int unsigned J     = 256,
  parameter int unsigned DEPTH = 13824,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned DW   = N * J
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
