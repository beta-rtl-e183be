// addr_gen: address generator of the compute buffer reads.
//
// Turns the sequencer's loop indices into the two read addresses of a step:
//   activation entry = x_base + rg * n_chunks + ch
//   operand entry    = b_base + cg * n_chunks + ch
// i.e. each packed row group and each N-column group occupies n_chunks
// consecutive entries, one per J-element slice of the reduction dimension.
// The bit-plane index does not enter: all planes of an operand entry are read
// from the same entry. Purely combinational; the addresses are truncated to
// the buffer address widths. The layout is this design's choice.
module addr_gen
  import beta_pkg::*;
#(
  parameter int unsigned XAW = 11,
  parameter int unsigned BAW = 10
) (
  input  qmm_desc_t      desc,
  input  logic [15:0]    rg,
  input  logic [15:0]    cg,
  input  logic [15:0]    ch,
  output logic [XAW-1:0] x_addr,
  output logic [BAW-1:0] b_addr
);
  logic [31:0] xa, ba;
  assign xa = 32'(desc.x_base) + 32'(rg) * 32'(desc.n_chunks) + 32'(ch);
  assign ba = 32'(desc.b_base) + 32'(cg) * 32'(desc.n_chunks) + 32'(ch);
  assign x_addr = xa[XAW-1:0];
  assign b_addr = ba[BAW-1:0];
endmodule
