// tb_beta_top_full: one complete binary linear layer slice on the accelerator
// at its default size (N = 2 DPUs of J = 256 PEs, 64-lane vector unit).
// A W1A4 activation matrix of 8 rows x 512 elements is multiplied by a binary
// weight matrix of 512 x 64 (written to the weight buffer, copied into the
// compute buffer); the 512 integer results go through out1 to the vector unit,
// which applies a coefficient and an offset vector, and are read back from the
// vector buffer and compared with a reference computed here. The QMM must take
// 4 row groups x 32 column groups x 2 chunks = 256 steps plus 7 cycles.
module tb_beta_top_full;
  import beta_pkg::*;
  localparam int N = 2, J = 256, VL = 64, ACC_W = 32;
  localparam int XAW = 11, BAW = 10, WAW = 14, VAW = 6, CW = 7;
  localparam int M = 8, D = 512, K = 64, BITS = 4, P = 2;
  localparam int C = D / J, G = K / N, R = M / P;

  logic clk = 0, rst_n = 0;
  logic x_wr_en = 0, b_wr_en = 0, wb_wr_en = 0, cp_start = 0, qmm_start = 0;
  logic [XAW-1:0] x_wr_addr; logic [J*8-1:0] x_wr_data;
  logic [BAW-1:0] b_wr_addr; logic [N*J*8-1:0] b_wr_data;
  logic [WAW-1:0] wb_wr_addr; logic [N*J-1:0] wb_wr_data;
  logic [WAW-1:0] cp_src; logic [BAW-1:0] cp_dst; logic [15:0] cp_len; logic cp_busy;
  qmm_desc_t qmm_desc;
  logic qmm_busy, qmm_done, out2_valid;
  logic [ACC_W-1:0] out2_vec [VL];
  logic [CW-1:0] out2_rows;
  logic vpu_cfg_load = 0, vpu_cmd_valid = 0, vpu_y_valid;
  logic [VAW-1:0] vpu_cfg_k, vpu_cfg_b, vpu_cfg_dst, vpu_cmd_x, vpu_cmd_k, vpu_cmd_b, vpu_cmd_dst;
  logic signed [15:0] vpu_y [VL];
  logic [VAW-1:0] vb_rd_addr, vb_wr_addr;
  logic signed [15:0] vb_rd_data [VL], vb_wr_data [VL];
  logic vb_wr_en = 0, vb_wr_ready;
  logic sm_in_valid = 0, sm_in_last = 0, sm_in_ready, sm_out_valid, sm_out_last;
  logic signed [15:0] sm_in_data = 0, sm_out_data;
  logic ge_in_valid = 0, ge_in_last = 0, ge_out_valid, ge_out_last;
  logic signed [15:0] ge_in_data = 0, ge_out_data;
  logic ln_in_valid = 0, ln_in_last = 0, ln_in_ready, ln_out_valid, ln_out_last;
  logic signed [15:0] ln_in_data = 0, ln_in_gamma = 0, ln_in_beta = 0, ln_out_data;

  beta_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int A [M][D];
  int B [D][K];
  logic signed [15:0] kvec [VL], bvec [VL];

  function automatic logic signed [15:0] sat16(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  initial begin
    int cyc;
    x_wr_addr = '0; x_wr_data = '0; b_wr_addr = '0; b_wr_data = '0;
    wb_wr_addr = '0; wb_wr_data = '0; cp_src = '0; cp_dst = '0; cp_len = '0; qmm_desc = '0;
    vpu_cfg_k = '0; vpu_cfg_b = '0; vpu_cfg_dst = '0;
    vpu_cmd_x = '0; vpu_cmd_k = '0; vpu_cmd_b = '0; vpu_cmd_dst = '0;
    vb_rd_addr = '0; vb_wr_addr = '0; foreach (vb_wr_data[i]) vb_wr_data[i] = '0;
    foreach (A[m, d]) A[m][d] = $urandom % (1 << BITS);
    foreach (B[d, k]) B[d][k] = $urandom % 2;
    foreach (kvec[i]) begin kvec[i] = 16'(int'($urandom % 256) + 16); bvec[i] = 16'(int'($urandom % 1024) - 512); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // coefficient and offset vectors
    for (int a = 0; a < 2; a++) begin
      @(negedge clk);
      vb_wr_en = 1; vb_wr_addr = VAW'(a);
      foreach (vb_wr_data[i]) vb_wr_data[i] = (a == 0) ? kvec[i] : bvec[i];
    end
    @(negedge clk); vb_wr_en = 0;
    // packed activations
    for (int rg = 0; rg < R; rg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        x_wr_en = 1; x_wr_addr = XAW'(rg * C + c);
        for (int j = 0; j < J; j++)
          x_wr_data[j*8 +: 8] = 8'(A[rg * P][c * J + j] | (A[rg * P + 1][c * J + j] << BITS));
      end
    @(negedge clk); x_wr_en = 0;
    // binary weights, then copy into the compute buffer
    for (int cg = 0; cg < G; cg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_addr = WAW'(cg * C + c);
        for (int n = 0; n < N; n++)
          for (int j = 0; j < J; j++) wb_wr_data[n*J + j] = 1'(B[c * J + j][cg * N + n]);
      end
    @(negedge clk); wb_wr_en = 0;
    cp_start = 1; cp_src = '0; cp_dst = '0; cp_len = 16'(G * C);
    @(negedge clk); cp_start = 0;
    while (cp_busy) @(negedge clk);
    @(negedge clk);
    vpu_cfg_load = 1; vpu_cfg_k = 0; vpu_cfg_b = 1; vpu_cfg_dst = VAW'(8);
    @(negedge clk); vpu_cfg_load = 0;
    // the QMM
    qmm_desc = '0;
    qmm_desc.qtype = QMM_AW; qmm_desc.prec = PREC_A4; qmm_desc.xbits = 4'd1;
    qmm_desc.n_chunks = 16'(C); qmm_desc.n_rowgrp = 16'(R); qmm_desc.n_colgrp = 16'(G);
    qmm_desc.out_sel = OUT_VPU;
    @(negedge clk); qmm_start = 1;
    @(negedge clk); qmm_start = 0;
    cyc = 1;
    while (!qmm_done && cyc < 10000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != R * G * C + 7) begin failures++; $display("FAIL cycles %0d", cyc); end
    repeat (4) @(negedge clk);
    // results: stream order rg, cg, lane, dpu
    for (int v = 0; v < M * K / VL; v++) begin
      vb_rd_addr = VAW'(8 + v);
      @(negedge clk);
      for (int i = 0; i < VL; i++) begin
        int idx, g, rg, cg, l, n;
        longint s;
        logic signed [15:0] e;
        idx = v * VL + i; g = idx / (P * N); rg = g / G; cg = g % G; l = (idx % (P * N)) / N; n = idx % N;
        s = 0;
        for (int d = 0; d < D; d++) s += longint'(A[rg * P + l][d]) * longint'(B[d][cg * N + n]);
        e = sat16(((s * longint'(kvec[i])) >>> 8) + longint'(bvec[i]));
        checks++;
        if (vb_rd_data[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL vec %0d lane %0d: %0d vs %0d", v, i, vb_rd_data[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
