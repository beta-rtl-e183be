// beta_top: binarized transformer accelerator (QMM engine, vector process
// unit, vector buffer and the three non-linear function units).
//
// The host (a microcontroller) and off-chip memory sit on the SoC side of
// the ports below; the host quantizes activations, loads operands, starts
// operations and moves vectors between units.
//   QMM engine   : integer matrix products of packed 8/4/2/1-bit activations
//                  with binary weights or with other activations.
//   out1         : integer results go straight to the vector process unit,
//                  which scales them by fused coefficients and adds fused
//                  offsets (FIX-16) and writes the vector buffer.
//   out2         : integer results are transposed and returned to the host.
//   non-linear   : softmax, GELU and layer normalisation on FIX-16 streams,
//                  connected to the SoC side only.
// Port groups follow the units; their timing is described in each unit.
// The block set and the out1/out2 routing follow the paper's architecture
// figure; the port protocol is this design's choice.
module beta_top
  import beta_pkg::*;
#(
  parameter int unsigned N        = 2,
  parameter int unsigned J        = 256,
  parameter int unsigned VL       = 64,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned X_DEPTH  = 2048,
  parameter int unsigned B_DEPTH  = 1024,
  parameter int unsigned WB_DEPTH = 13824,
  parameter int unsigned VB_DEPTH = 64,
  parameter int unsigned NL_LEN   = 1024,
  localparam int unsigned XAW     = $clog2(X_DEPTH),
  localparam int unsigned BAW     = $clog2(B_DEPTH),
  localparam int unsigned WAW     = $clog2(WB_DEPTH),
  localparam int unsigned VAW     = $clog2(VB_DEPTH),
  localparam int unsigned CW      = $clog2(VL + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ---- QMM engine loading
  input  logic                    x_wr_en,
  input  logic [XAW-1:0]          x_wr_addr,
  input  logic [J*8-1:0]          x_wr_data,
  input  logic                    b_wr_en,
  input  logic [BAW-1:0]          b_wr_addr,
  input  logic [N*J*8-1:0]        b_wr_data,
  input  logic                    wb_wr_en,
  input  logic [WAW-1:0]          wb_wr_addr,
  input  logic [N*J-1:0]          wb_wr_data,
  input  logic                    cp_start,
  input  logic [WAW-1:0]          cp_src,
  input  logic [BAW-1:0]          cp_dst,
  input  logic [15:0]             cp_len,
  output logic                    cp_busy,
  // ---- QMM operation
  input  logic                    qmm_start,
  input  qmm_desc_t               qmm_desc,
  output logic                    qmm_busy,
  output logic                    qmm_done,
  output logic                    out2_valid,
  output logic [ACC_W-1:0]        out2_vec [VL],
  output logic [CW-1:0]           out2_rows,
  // ---- vector process unit
  input  logic                    vpu_cfg_load,
  input  logic [VAW-1:0]          vpu_cfg_k,
  input  logic [VAW-1:0]          vpu_cfg_b,
  input  logic [VAW-1:0]          vpu_cfg_dst,
  input  logic                    vpu_cmd_valid,
  input  logic [VAW-1:0]          vpu_cmd_x,
  input  logic [VAW-1:0]          vpu_cmd_k,
  input  logic [VAW-1:0]          vpu_cmd_b,
  input  logic [VAW-1:0]          vpu_cmd_dst,
  output logic                    vpu_y_valid,
  output logic signed [FIX_W-1:0] vpu_y [VL],
  // ---- vector buffer, host side
  input  logic [VAW-1:0]          vb_rd_addr,
  output logic signed [FIX_W-1:0] vb_rd_data [VL],
  input  logic                    vb_wr_en,
  input  logic [VAW-1:0]          vb_wr_addr,
  input  logic signed [FIX_W-1:0] vb_wr_data [VL],
  output logic                    vb_wr_ready,
  // ---- softmax
  input  logic                    sm_in_valid,
  input  logic                    sm_in_last,
  input  logic signed [FIX_W-1:0] sm_in_data,
  output logic                    sm_in_ready,
  output logic                    sm_out_valid,
  output logic                    sm_out_last,
  output logic signed [FIX_W-1:0] sm_out_data,
  // ---- GELU
  input  logic                    ge_in_valid,
  input  logic                    ge_in_last,
  input  logic signed [FIX_W-1:0] ge_in_data,
  output logic                    ge_out_valid,
  output logic                    ge_out_last,
  output logic signed [FIX_W-1:0] ge_out_data,
  // ---- layer normalisation
  input  logic                    ln_in_valid,
  input  logic                    ln_in_last,
  input  logic signed [FIX_W-1:0] ln_in_data,
  input  logic signed [FIX_W-1:0] ln_in_gamma,
  input  logic signed [FIX_W-1:0] ln_in_beta,
  output logic                    ln_in_ready,
  output logic                    ln_out_valid,
  output logic                    ln_out_last,
  output logic signed [FIX_W-1:0] ln_out_data
);
  logic             out1_valid;
  logic [ACC_W-1:0] out1_vec [VL];
  logic [CW-1:0]    out1_cnt;

  qmm_engine #(
    .N(N), .J(J), .VL(VL), .ACC_W(ACC_W),
    .X_DEPTH(X_DEPTH), .B_DEPTH(B_DEPTH), .WB_DEPTH(WB_DEPTH)
  ) u_qmm (
    .clk, .rst_n,
    .x_wr_en, .x_wr_addr, .x_wr_data,
    .b_wr_en, .b_wr_addr, .b_wr_data,
    .wb_wr_en, .wb_wr_addr, .wb_wr_data,
    .cp_start, .cp_src, .cp_dst, .cp_len, .cp_busy,
    .start(qmm_start), .desc_in(qmm_desc), .busy(qmm_busy), .done(qmm_done),
    .out1_valid, .out1_vec, .out1_cnt,
    .out2_valid, .out2_vec, .out2_rows
  );

  logic [VAW-1:0]          k_addr, b_addr, x_addr, w_addr;
  logic signed [FIX_W-1:0] k_data [VL];
  logic signed [FIX_W-1:0] b_data [VL];
  logic signed [FIX_W-1:0] x_data [VL];
  logic signed [FIX_W-1:0] w_data [VL];
  logic                    w_en;

  vpu #(.VL(VL), .ACC_W(ACC_W), .AW(VAW)) u_vpu (
    .clk, .rst_n,
    .cfg_load(vpu_cfg_load), .cfg_k(vpu_cfg_k), .cfg_b(vpu_cfg_b), .cfg_dst(vpu_cfg_dst),
    .s_valid(out1_valid), .s_vec(out1_vec),
    .cmd_valid(vpu_cmd_valid), .cmd_x(vpu_cmd_x), .cmd_k(vpu_cmd_k),
    .cmd_b(vpu_cmd_b), .cmd_dst(vpu_cmd_dst),
    .vb_k_addr(k_addr), .vb_k_data(k_data),
    .vb_b_addr(b_addr), .vb_b_data(b_data),
    .vb_x_addr(x_addr), .vb_x_data(x_data),
    .vb_wr_en(w_en), .vb_wr_addr(w_addr), .vb_wr_data(w_data),
    .y_valid(vpu_y_valid), .y(vpu_y)
  );

  vector_buffer #(.VL(VL), .DEPTH(VB_DEPTH)) u_vbuf (
    .clk,
    .k_addr, .k_data, .b_addr, .b_data, .x_addr, .x_data,
    .v_wr_en(w_en), .v_wr_addr(w_addr), .v_wr_data(w_data),
    .h_rd_addr(vb_rd_addr), .h_rd_data(vb_rd_data),
    .h_wr_en(vb_wr_en), .h_wr_addr(vb_wr_addr), .h_wr_data(vb_wr_data),
    .host_wr_ready(vb_wr_ready)
  );

  softmax_unit #(.MAXLEN(NL_LEN)) u_softmax (
    .clk, .rst_n,
    .in_valid(sm_in_valid), .in_last(sm_in_last), .in_data(sm_in_data), .in_ready(sm_in_ready),
    .out_valid(sm_out_valid), .out_last(sm_out_last), .out_data(sm_out_data)
  );

  gelu_unit u_gelu (
    .clk, .rst_n,
    .in_valid(ge_in_valid), .in_last(ge_in_last), .in_data(ge_in_data),
    .out_valid(ge_out_valid), .out_last(ge_out_last), .out_data(ge_out_data)
  );

  layernorm_unit #(.MAXLEN(NL_LEN)) u_layernorm (
    .clk, .rst_n,
    .in_valid(ln_in_valid), .in_last(ln_in_last), .in_data(ln_in_data),
    .in_gamma(ln_in_gamma), .in_beta(ln_in_beta), .in_ready(ln_in_ready),
    .out_valid(ln_out_valid), .out_last(ln_out_last), .out_data(ln_out_data)
  );
endmodule
