// compute_buffer: the QMM engine's operand store.
//
// The matrices of a QMM are loaded here before it starts, so that the dot
// product units are fed one full tile per cycle without external bandwidth.
// Two regions, each a simple dual-port memory with synchronous read (data the
// cycle after rd_en):
//   activation region: entries of J packed 8-bit words (J*8 bits), word j is
//     element j of up to eight packed activation rows;
//   operand region: entries of N columns x J elements x 8 bits; element j of
//     column n sits at bits [(n*J + j)*8 +: 8]. Binary weights copied from the
//     weight buffer occupy bit 0 of each element.
// The paper states what the buffer holds; the two-region organisation, the
// element format and the default depths are this design's choice.
module compute_buffer #(
  parameter int unsigned N       = 2,
  parameter int unsigned J       = 256,
  parameter int unsigned X_DEPTH = 2048,
  parameter int unsigned B_DEPTH = 1024,
  localparam int unsigned XAW    = $clog2(X_DEPTH),
  localparam int unsigned BAW    = $clog2(B_DEPTH),
  localparam int unsigned XDW    = J * 8,
  localparam int unsigned BDW    = N * J * 8
) (
  input  logic           clk,
  // activation region
  input  logic           x_wr_en,
  input  logic [XAW-1:0] x_wr_addr,
  input  logic [XDW-1:0] x_wr_data,
  input  logic           x_rd_en,
  input  logic [XAW-1:0] x_rd_addr,
  output logic [XDW-1:0] x_rd_data,
  // operand region
  input  logic           b_wr_en,
  input  logic [BAW-1:0] b_wr_addr,
  input  logic [BDW-1:0] b_wr_data,
  input  logic           b_rd_en,
  input  logic [BAW-1:0] b_rd_addr,
  output logic [BDW-1:0] b_rd_data
);
  logic [XDW-1:0] xmem [X_DEPTH];
  logic [BDW-1:0] bmem [B_DEPTH];

  always_ff @(posedge clk) begin
    if (x_wr_en) xmem[x_wr_addr] <= x_wr_data;
    if (x_rd_en) x_rd_data <= xmem[x_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (b_wr_en) bmem[b_wr_addr] <= b_wr_data;
    if (b_rd_en) b_rd_data <= bmem[b_rd_addr];
  end
endmodule
