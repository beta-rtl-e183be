// beta_pkg: types and constants shared by the binarized transformer accelerator.
//
// Every PE operand is an 8-bit word that packs 1, 2, 4 or 8 activation
// sub-words (8, 4, 2 or 1 bits each). The precision code below selects the
// packing; the number of packed sub-words is also the number of independent
// dot products ("lanes") a dot product unit produces per cycle.
// The 8-bit PE word, the four precisions and the two QMM types follow the
// paper; the binary encodings of the codes are this design's choice.
package beta_pkg;

  localparam int unsigned PE_W      = 8;   // PE operand / output width
  localparam int unsigned MAX_LANES = 8;   // sub-words per PE word at 1-bit precision
  localparam int unsigned FIX_W     = 16;  // full-precision fixed-point width (FIX-16)
  localparam int unsigned FIX_FRAC  = 8;   // fractional bits of FIX-16 values

  // Activation precision of the packed operand (W1A8, W1A4, W1A2, W1A1).
  typedef enum logic [1:0] {
    PREC_A8 = 2'd0,
    PREC_A4 = 2'd1,
    PREC_A2 = 2'd2,
    PREC_A1 = 2'd3
  } prec_e;

  // Quantized matrix multiplication type.
  typedef enum logic {
    QMM_AW = 1'b0,   // activation x binary weight (second operand 1 bit)
    QMM_AA = 1'b1    // activation x activation (second operand traversed bit-serially)
  } qmm_type_e;

  // Destination of QMM results.
  typedef enum logic {
    OUT_VPU  = 1'b0, // out1: to the vector process unit
    OUT_TRAN = 1'b1  // out2: to the transpose unit
  } out_sel_e;

  // Descriptor of one QMM operation, written by the host.
  // Result(r, col) = sum over d of A(r, d) * B(d, col), where A is packed in
  // the compute buffer's activation region (lanes = rows) and B in its operand
  // region, N columns per entry.
  typedef struct packed {
    qmm_type_e   qtype;     // activation x weight or activation x activation
    prec_e       prec;      // precision of A (sets rows per packed word)
    logic [3:0]  xbits;     // bits of B traversed serially (1 for binary weights)
    logic [15:0] x_base;    // first activation-region entry
    logic [15:0] b_base;    // first operand-region entry
    logic [15:0] n_chunks;  // reduction length / J
    logic [15:0] n_rowgrp;  // number of packed row groups of A
    logic [15:0] n_colgrp;  // number of N-column groups of B
    out_sel_e    out_sel;   // out1 (vector unit) or out2 (transpose)
  } qmm_desc_t;

  function automatic int unsigned prec_bits(prec_e p);
    return int'(PE_W) >> p;
  endfunction

  function automatic int unsigned prec_lanes(prec_e p);
    return 1 << p;
  endfunction

  // Saturate a signed value to FIX_W bits.
  function automatic logic signed [FIX_W-1:0] sat_fix(logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[FIX_W-1:0];
  endfunction

endpackage
