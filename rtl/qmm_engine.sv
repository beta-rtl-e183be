// qmm_engine: quantized matrix multiplication engine.
//
// Computes R(r, col) = sum_d A(r, d) * B(d, col) for unsigned integer A and B,
// where A is an activation matrix of 8, 4, 2 or 1 bits and B is either a
// binary weight matrix (activation x weight) or a second activation matrix
// of up to 8 bits (activation x activation). Full-precision coefficients and
// offsets are not applied here; the vector process unit does that afterwards.
//
// Data path (one step per cycle):
//   compute buffer --(addresses from addr_gen)--> p2s --> N DPUs --> s2p
//   --> out1 (vector unit) or out2 (transpose unit, then to the host).
// The N DPUs share the activation entry (J packed words) and each takes its
// own column of B, so one step forms N x 8/b dot-product slices of J
// elements; a W1A4 activation x weight step therefore does 2 x N x J
// multiplications in one cycle, and a 4-bit activation x activation product
// needs four steps, one per bit of B.
// Loading: the host writes activation entries and activation operands
// (x_wr_*, b_wr_*), writes binary weights into the weight buffer (wb_wr_*),
// and copies weight entries into the operand region with cp_* (one entry per
// cycle; a weight bit becomes bit 0 of an 8-bit element). Host writes to the
// operand region and copies must not overlap in time.
// Operation: pulse start with a descriptor while busy is low; done pulses
// when the last result vector has left through out1 or has entered the
// transpose unit. The columns of the last tile on out2 follow within
// 2 VL + 2 cycles after done.
// Structure and parallelism follow the paper; buffer layouts, the loop order
// and the copy path are this design's choices.
module qmm_engine
  import beta_pkg::*;
#(
  parameter int unsigned N        = 2,
  parameter int unsigned J        = 256,
  parameter int unsigned VL       = 64,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned X_DEPTH  = 2048,
  parameter int unsigned B_DEPTH  = 1024,
  parameter int unsigned WB_DEPTH = 13824,
  localparam int unsigned XAW     = $clog2(X_DEPTH),
  localparam int unsigned BAW     = $clog2(B_DEPTH),
  localparam int unsigned WAW     = $clog2(WB_DEPTH),
  localparam int unsigned CW      = $clog2(VL + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host loading
  input  logic             x_wr_en,
  input  logic [XAW-1:0]   x_wr_addr,
  input  logic [J*8-1:0]   x_wr_data,
  input  logic             b_wr_en,
  input  logic [BAW-1:0]   b_wr_addr,
  input  logic [N*J*8-1:0] b_wr_data,
  input  logic             wb_wr_en,
  input  logic [WAW-1:0]   wb_wr_addr,
  input  logic [N*J-1:0]   wb_wr_data,
  input  logic             cp_start,
  input  logic [WAW-1:0]   cp_src,
  input  logic [BAW-1:0]   cp_dst,
  input  logic [15:0]      cp_len,
  output logic             cp_busy,
  // operation control
  input  logic             start,
  input  qmm_desc_t        desc_in,
  output logic             busy,
  output logic             done,
  // results
  output logic             out1_valid,
  output logic [ACC_W-1:0] out1_vec [VL],
  output logic [CW-1:0]    out1_cnt,
  output logic             out2_valid,
  output logic [ACC_W-1:0] out2_vec [VL],
  output logic [CW-1:0]    out2_rows
);
  // ---------------------------------------------------------------- copy
  logic [15:0]    cp_i, cp_n;
  logic [WAW-1:0] cp_s;
  logic [BAW-1:0] cp_d;
  logic           cp_wr;        // weight read data valid this cycle
  logic [BAW-1:0] cp_wr_addr;
  logic [N*J-1:0] wb_rd_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cp_busy <= 1'b0;
      cp_i    <= '0;
      cp_n    <= '0;
      cp_s    <= '0;
      cp_d    <= '0;
      cp_wr   <= 1'b0;
      cp_wr_addr <= '0;
    end else begin
      cp_wr <= cp_busy;
      cp_wr_addr <= cp_d + BAW'(cp_i);
      if (!cp_busy && cp_start && cp_len != 16'd0) begin
        cp_busy <= 1'b1;
        cp_i    <= '0;
        cp_n    <= cp_len;
        cp_s    <= cp_src;
        cp_d    <= cp_dst;
      end else if (cp_busy) begin
        cp_i <= cp_i + 16'd1;
        if (cp_i == cp_n - 16'd1) cp_busy <= 1'b0;
      end
    end
  end

  weight_buffer #(.N(N), .J(J), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk,
    .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(cp_busy), .rd_addr(cp_s + WAW'(cp_i)), .rd_data(wb_rd_data)
  );

  // Input multiplexer of the operand region: host data or expanded weights.
  logic [N*J*8-1:0] wexp;
  always_comb for (int k = 0; k < int'(N * J); k++) wexp[k*8 +: 8] = {7'd0, wb_rd_data[k]};

  logic             bw_en;
  logic [BAW-1:0]   bw_addr;
  logic [N*J*8-1:0] bw_data;
  assign bw_en   = cp_wr | b_wr_en;
  assign bw_addr = cp_wr ? cp_wr_addr : b_wr_addr;
  assign bw_data = cp_wr ? wexp : b_wr_data;

  // ---------------------------------------------------------------- control
  qmm_desc_t   desc;
  logic        step_valid, first, dbl, last, flush;
  logic [15:0] rg, cg, ch;
  logic [2:0]  plane;

  read_ctrl u_rctl (
    .clk, .rst_n, .start, .desc_in, .desc, .busy, .done, .flush,
    .step_valid, .rg, .cg, .ch, .plane, .first, .dbl, .last
  );

  logic [XAW-1:0] x_addr;
  logic [BAW-1:0] b_addr;
  addr_gen #(.XAW(XAW), .BAW(BAW)) u_agen (
    .desc, .rg, .cg, .ch, .x_addr, .b_addr
  );

  logic [J*8-1:0]   x_line;
  logic [N*J*8-1:0] b_line;
  compute_buffer #(.N(N), .J(J), .X_DEPTH(X_DEPTH), .B_DEPTH(B_DEPTH)) u_cbuf (
    .clk,
    .x_wr_en, .x_wr_addr, .x_wr_data,
    .x_rd_en(step_valid), .x_rd_addr(x_addr), .x_rd_data(x_line),
    .b_wr_en(bw_en), .b_wr_addr(bw_addr), .b_wr_data(bw_data),
    .b_rd_en(step_valid), .b_rd_addr(b_addr), .b_rd_data(b_line)
  );

  // Step flags delayed by the buffer read.
  logic       s1_valid, s1_first, s1_dbl, s1_last;
  logic [2:0] s1_plane;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_dbl   <= 1'b0;
      s1_last  <= 1'b0;
      s1_plane <= '0;
    end else begin
      s1_valid <= step_valid;
      s1_first <= first;
      s1_dbl   <= dbl;
      s1_last  <= last;
      s1_plane <= plane;
    end
  end

  logic            s2_valid, s2_first, s2_dbl, s2_last;
  logic [PE_W-1:0] s2_x [J];
  logic [J-1:0]    s2_w [N];
  p2s #(.N(N), .J(J)) u_p2s (
    .clk, .rst_n,
    .in_valid(s1_valid), .in_first(s1_first), .in_dbl(s1_dbl), .in_last(s1_last),
    .plane(s1_plane), .x_line, .b_line,
    .out_valid(s2_valid), .out_first(s2_first), .out_dbl(s2_dbl), .out_last(s2_last),
    .x(s2_x), .w(s2_w)
  );

  // ---------------------------------------------------------------- DPUs
  logic             d_valid [N];
  logic [ACC_W-1:0] d_res [N][MAX_LANES];
  for (genvar n = 0; n < N; n++) begin : g_dpu
    dpu #(.J(J), .ACC_W(ACC_W)) u_dpu (
      .clk, .rst_n, .prec(desc.prec),
      .in_valid(s2_valid), .first(s2_first), .dbl(s2_dbl), .last(s2_last),
      .x(s2_x), .w(s2_w[n]),
      .out_valid(d_valid[n]), .res(d_res[n])
    );
  end

  // ---------------------------------------------------------------- output
  logic             v_valid;
  logic [ACC_W-1:0] v_vec [VL];
  logic [CW-1:0]    v_cnt;
  s2p #(.N(N), .VL(VL), .ACC_W(ACC_W)) u_s2p (
    .clk, .rst_n, .prec(desc.prec), .in_valid(d_valid[0]), .res(d_res),
    .flush, .vec_valid(v_valid), .vec(v_vec), .vec_cnt(v_cnt)
  );

  // Output demultiplexer: out1 to the vector unit, out2 to the transpose unit.
  assign out1_valid = v_valid && (desc.out_sel == OUT_VPU);
  assign out1_vec   = v_vec;
  assign out1_cnt   = v_cnt;

  logic t_flush;
  always_ff @(posedge clk) begin
    if (!rst_n) t_flush <= 1'b0;
    else        t_flush <= flush;
  end

  transpose_unit #(.VL(VL), .ACC_W(ACC_W)) u_tran (
    .clk, .rst_n,
    .in_valid(v_valid && (desc.out_sel == OUT_TRAN)), .in_vec(v_vec),
    .flush(t_flush && (desc.out_sel == OUT_TRAN)),
    .out_valid(out2_valid), .out_vec(out2_vec), .out_rows(out2_rows)
  );

  assert property (@(posedge clk) disable iff (!rst_n) !(cp_wr && b_wr_en));
endmodule
