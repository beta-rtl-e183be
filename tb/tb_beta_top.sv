// tb_beta_top: end-to-end run of the accelerator at reduced size
// (N = 2 DPUs of J = 16 PEs, 16-lane vector unit).
//   1. For each activation precision (8, 4, 2, 1 bits): binary weights are
//      written to the weight buffer and copied into the compute buffer,
//      packed activations are loaded, and an activation x weight QMM runs with
//      its results on out1; the vector unit scales them by a coefficient vector
//      and adds an offset vector, and the host reads the vector buffer back.
//   2. A vector-unit command chains a second term onto one result
//      (y2 = y1 * k2 + b2).
//   3. An 8-bit activation x activation QMM (query x key) runs with results on
//      out2 through the transpose unit.
//   4. Softmax, GELU and layer normalisation process streams.
// Every value is compared with a reference computed here. The testbench
// counts how often each mechanism occurred (precision modes, bit-serial
// doubling, multi-chunk accumulation, weight copy, out1, out2, partial-vector
// flush, partial transpose tile, vector-unit stream/command/saturation, host
// write held off, each non-linear unit) and counts a failure for any that
// never occurred.
module tb_beta_top;
  import beta_pkg::*;
  localparam int N = 2, J = 16, VL = 16, ACC_W = 32;
  localparam int XD = 64, BD = 32, WD = 32, VD = 32, NL = 64;
  localparam int XAW = $clog2(XD), BAW = $clog2(BD), WAW = $clog2(WD), VAW = $clog2(VD);
  localparam int CW = $clog2(VL + 1);

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
  logic signed [15:0] sm_in_data, sm_out_data;
  logic ge_in_valid = 0, ge_in_last = 0, ge_out_valid, ge_out_last;
  logic signed [15:0] ge_in_data, ge_out_data;
  logic ln_in_valid = 0, ln_in_last = 0, ln_in_ready, ln_out_valid, ln_out_last;
  logic signed [15:0] ln_in_data, ln_in_gamma, ln_in_beta, ln_out_data;

  beta_top #(.N(N), .J(J), .VL(VL), .ACC_W(ACC_W), .X_DEPTH(XD), .B_DEPTH(BD),
             .WB_DEPTH(WD), .VB_DEPTH(VD), .NL_LEN(NL)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_prec [4], n_dbl, n_multichunk, n_copy, n_out1, n_out2, n_s2p_flush, n_tile_part;
  int n_vpu_stream, n_vpu_cmd, n_vpu_sat, n_hold, n_sm, n_ge, n_ln;

  // monitors on internal events that have no port of their own
  always @(posedge clk) if (rst_n) begin
    if (dut.u_qmm.s2_valid && dut.u_qmm.s2_dbl) n_dbl++;
    if (dut.u_qmm.s2_valid && !dut.u_qmm.s2_first && !dut.u_qmm.s2_dbl) n_multichunk++;
    if (dut.u_qmm.cp_wr) n_copy++;
    if (dut.u_qmm.v_valid && dut.u_qmm.v_cnt != CW'(VL)) n_s2p_flush++;
    if (out2_valid && out2_rows != CW'(VL)) n_tile_part++;
    if (vpu_y_valid) foreach (vpu_y[i]) if (vpu_y[i] == 16'sh7fff || vpu_y[i] == 16'sh8000) n_vpu_sat++;
    if (vb_wr_en && !vb_wr_ready) n_hold++;
  end

  function automatic logic signed [15:0] sat16(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------------ QMM helpers
  int A [64][64];
  int B [64][64];

  task automatic load_act(int M, int D, int bits, int base);
    int P, C;
    P = 8 / bits; C = D / J;
    for (int rg = 0; rg < (M + P - 1) / P; rg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        x_wr_en = 1; x_wr_addr = XAW'(base + rg * C + c);
        for (int j = 0; j < J; j++) begin
          logic [7:0] wv;
          wv = '0;
          for (int l = 0; l < P; l++)
            if (rg * P + l < M) wv |= 8'(A[rg * P + l][c * J + j] << (l * bits));
          x_wr_data[j*8 +: 8] = wv;
        end
      end
    @(negedge clk); x_wr_en = 0;
  endtask

  task automatic load_weights_and_copy(int D, int K);
    int C, G;
    C = D / J; G = K / N;
    for (int cg = 0; cg < G; cg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_addr = WAW'(5 + cg * C + c);
        for (int n = 0; n < N; n++)
          for (int j = 0; j < J; j++) wb_wr_data[n*J + j] = 1'(B[c * J + j][cg * N + n]);
      end
    @(negedge clk); wb_wr_en = 0;
    cp_start = 1; cp_src = WAW'(5); cp_dst = '0; cp_len = 16'(G * C);
    @(negedge clk); cp_start = 0;
    while (cp_busy) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic load_operand(int D, int K);
    int C;
    C = D / J;
    for (int cg = 0; cg < K / N; cg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        b_wr_en = 1; b_wr_addr = BAW'(cg * C + c);
        for (int n = 0; n < N; n++)
          for (int j = 0; j < J; j++) b_wr_data[(n*J + j)*8 +: 8] = 8'(B[c * J + j][cg * N + n]);
      end
    @(negedge clk); b_wr_en = 0;
  endtask

  task automatic run_qmm(qmm_type_e qt, prec_e p, int X, int M, int D, int K, out_sel_e os, output int cyc);
    int P, R, G, C;
    P = 1 << p; R = (M + P - 1) / P; G = K / N; C = D / J;
    qmm_desc = '0;
    qmm_desc.qtype = qt; qmm_desc.prec = p; qmm_desc.xbits = 4'(X);
    qmm_desc.n_chunks = 16'(C); qmm_desc.n_rowgrp = 16'(R); qmm_desc.n_colgrp = 16'(G);
    qmm_desc.out_sel = os;
    @(negedge clk); qmm_start = 1;
    @(negedge clk); qmm_start = 0;
    cyc = 1;
    while (!qmm_done && cyc < 100000) begin @(negedge clk); cyc++; end
    chk(cyc == R * G * X * C + 7, $sformatf("QMM cycles %0d vs %0d", cyc, R * G * X * C + 7));
  endtask

  // expected integer result stream order: rg, cg, lane, dpu
  function automatic longint res_at(int M, int D, int K, int P, int idx);
    int per, g, rg, cg, l, n, G;
    longint s;
    G = K / N; per = P * N;
    g = idx / per; rg = g / G; cg = g % G; l = (idx % per) / N; n = idx % N;
    s = 0;
    if (rg * P + l >= M) return 0;
    for (int d = 0; d < D; d++) s += longint'(A[rg * P + l][d]) * longint'(B[d][cg * N + n]);
    return s;
  endfunction

  // ------------------------------------------------------------------ out2 capture
  longint s2 [1024];
  int tile_base, col;
  always @(posedge clk) if (rst_n && out2_valid) begin
    n_out2++;
    for (int r = 0; r < int'(out2_rows); r++) s2[(tile_base + r) * VL + col] = longint'(out2_vec[r]);
    col++;
    if (col == VL) begin col = 0; tile_base += int'(out2_rows); end
  end

  logic signed [15:0] kvec [VL], bvec [VL], k2vec [VL], b2vec [VL];
  logic signed [15:0] ystore [VD][VL];

  initial begin
    int cyc;
    x_wr_addr = '0; x_wr_data = '0; b_wr_addr = '0; b_wr_data = '0;
    wb_wr_addr = '0; wb_wr_data = '0; cp_src = '0; cp_dst = '0; cp_len = '0; qmm_desc = '0;
    vpu_cfg_k = '0; vpu_cfg_b = '0; vpu_cfg_dst = '0;
    vpu_cmd_x = '0; vpu_cmd_k = '0; vpu_cmd_b = '0; vpu_cmd_dst = '0;
    vb_rd_addr = '0; vb_wr_addr = '0; foreach (vb_wr_data[i]) vb_wr_data[i] = '0;
    sm_in_data = 0; ge_in_data = 0; ln_in_data = 0; ln_in_gamma = 0; ln_in_beta = 0;
    tile_base = 0; col = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // coefficient (alpha*beta) and offset vectors in the vector buffer: entries 0..3
    foreach (kvec[i]) begin
      kvec[i] = (i < 2) ? 16'sd4096 : 16'(int'($urandom % 128) + 8);  // 16.0 (saturates) or 0.03 .. 0.53
      bvec[i] = 16'(int'($urandom % 1024) - 512);
      k2vec[i] = 16'(int'($urandom % 1024) - 512);
      b2vec[i] = 16'(int'($urandom % 512) - 256);
    end
    for (int a = 0; a < 4; a++) begin
      @(negedge clk);
      vb_wr_en = 1; vb_wr_addr = VAW'(a);
      foreach (vb_wr_data[i]) vb_wr_data[i] = (a == 0) ? kvec[i] : (a == 1) ? bvec[i] : (a == 2) ? k2vec[i] : b2vec[i];
    end
    @(negedge clk); vb_wr_en = 0;

    // ---------------- 1. activation x weight in every precision, out1 -> VPU
    for (int p = 0; p < 4; p++) begin
      int bits, P, M, D, K, nres, nvec;
      bits = 8 >> p; P = 1 << p;
      M = 2 * P + (p == 0 ? 1 : 0); D = 32; K = 8;             // 2-3 row groups, 2 chunks, 4 col groups
      nres = ((M + P - 1) / P) * P * K;
      nvec = (nres + VL - 1) / VL;
      for (int m = 0; m < M; m++) for (int d = 0; d < D; d++) A[m][d] = $urandom % (1 << bits);
      for (int d = 0; d < D; d++) for (int k = 0; k < K; k++) B[d][k] = $urandom % 2;
      load_act(M, D, bits, 0);
      load_weights_and_copy(D, K);
      @(negedge clk);
      vpu_cfg_load = 1; vpu_cfg_k = 0; vpu_cfg_b = 1; vpu_cfg_dst = VAW'(8);
      @(negedge clk); vpu_cfg_load = 0;
      run_qmm(QMM_AW, prec_e'(p), 1, M, D, K, OUT_VPU, cyc);
      n_prec[p]++;
      repeat (4) @(negedge clk);
      for (int v = 0; v < nvec; v++) begin
        vb_rd_addr = VAW'(8 + v);
        @(negedge clk);
        n_vpu_stream++;
        n_out1++;
        for (int i = 0; i < VL && v * VL + i < nres; i++) begin
          longint r;
          logic signed [15:0] e;
          r = res_at(M, D, K, P, v * VL + i);
          e = sat16(((r * longint'(kvec[i])) >>> 8) + longint'(bvec[i]));
          ystore[8 + v][i] = vb_rd_data[i];
          chk(vb_rd_data[i] === e, $sformatf("p%0d vec %0d lane %0d: %0d vs %0d", p, v, i, vb_rd_data[i], e));
        end
      end
    end

    // ---------------- 2. chained term by command, with a host write held off
    begin
      logic signed [15:0] e [VL];
      foreach (e[i]) e[i] = sat16(((longint'(ystore[8][i]) * longint'(k2vec[i])) >>> 8) + longint'(b2vec[i]));
      @(negedge clk);
      vpu_cmd_valid = 1; vpu_cmd_x = VAW'(8); vpu_cmd_k = 2; vpu_cmd_b = 3; vpu_cmd_dst = VAW'(20);
      @(negedge clk);
      vpu_cmd_valid = 0;
      // the vector unit writes in this cycle; a host write now is held off
      vb_wr_en = 1; vb_wr_addr = VAW'(21); foreach (vb_wr_data[i]) vb_wr_data[i] = 16'sd7;
      #1;
      chk(!vb_wr_ready, "host write not held off");
      @(negedge clk); vb_wr_en = 0;
      n_vpu_cmd++;
      vb_rd_addr = VAW'(20);
      @(negedge clk);
      foreach (e[i]) chk(vb_rd_data[i] === e[i], $sformatf("cmd lane %0d", i));
    end

    // ---------------- 3. 8-bit activation x activation, out2 via transpose
    begin
      int M, D, K, nres;
      M = 5; D = 48; K = 6;              // 5 query rows, 48-dim, 6 keys: partial tile and vector
      for (int m = 0; m < M; m++) for (int d = 0; d < D; d++) A[m][d] = $urandom % 256;
      for (int d = 0; d < D; d++) for (int k = 0; k < K; k++) B[d][k] = $urandom % 256;
      load_act(M, D, 8, 32);
      load_operand(D, K);
      qmm_desc = '0;
      run_qmm_aa(M, D, K);
      nres = M * K;
      repeat (2 * VL + 6) @(negedge clk);
      for (int i = 0; i < nres; i++)
        chk(s2[i] == res_at(M, D, K, 1, i), $sformatf("aa elem %0d: %0d vs %0d", i, s2[i], res_at(M, D, K, 1, i)));
    end

    // ---------------- 4. non-linear units
    run_softmax();
    run_gelu();
    run_layernorm();

    // ---------------- mechanism coverage
    for (int p = 0; p < 4; p++) chk(n_prec[p] > 0, $sformatf("precision %0d never ran", p));
    chk(n_dbl > 0, "bit-serial doubling never happened");
    chk(n_multichunk > 0, "multi-chunk accumulation never happened");
    chk(n_copy > 0, "weight copy never happened");
    chk(n_out1 > 0, "out1 never used");
    chk(n_out2 > 0, "out2 never used");
    chk(n_s2p_flush > 0, "partial output vector never flushed");
    chk(n_tile_part > 0, "partial transpose tile never emitted");
    chk(n_vpu_stream > 0 && n_vpu_cmd > 0, "vector unit path unused");
    chk(n_vpu_sat > 0, "vector unit never saturated");
    chk(n_hold > 0, "host write never held off");
    chk(n_sm > 0 && n_ge > 0 && n_ln > 0, "a non-linear unit never ran");
    $display("mechanisms: prec %0d/%0d/%0d/%0d dbl %0d chunk %0d copy %0d out1 %0d out2 %0d flush %0d tile %0d stream %0d cmd %0d sat %0d hold %0d sm %0d ge %0d ln %0d",
             n_prec[0], n_prec[1], n_prec[2], n_prec[3], n_dbl, n_multichunk, n_copy, n_out1, n_out2,
             n_s2p_flush, n_tile_part, n_vpu_stream, n_vpu_cmd, n_vpu_sat, n_hold, n_sm, n_ge, n_ln);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_qmm_aa(int M, int D, int K);
    int cyc;
    qmm_desc = '0;
    qmm_desc.qtype = QMM_AA; qmm_desc.prec = PREC_A8; qmm_desc.xbits = 4'd8;
    qmm_desc.x_base = 16'd32; qmm_desc.b_base = 16'd0;
    qmm_desc.n_chunks = 16'(D / J); qmm_desc.n_rowgrp = 16'(M); qmm_desc.n_colgrp = 16'(K / N);
    qmm_desc.out_sel = OUT_TRAN;
    @(negedge clk); qmm_start = 1;
    @(negedge clk); qmm_start = 0;
    cyc = 1;
    while (!qmm_done && cyc < 100000) begin @(negedge clk); cyc++; end
    chk(cyc == M * (K / N) * 8 * (D / J) + 7, $sformatf("AA cycles %0d", cyc));
  endtask

  task automatic run_softmax();
    real xv [16], e [16], s, mx;
    int got;
    s = 0; mx = -1e9;
    for (int i = 0; i < 16; i++) begin xv[i] = real'(int'($urandom % 1024) - 512) / 256.0; if (xv[i] > mx) mx = xv[i]; end
    for (int i = 0; i < 16; i++) begin e[i] = $exp(xv[i] - mx); s += e[i]; end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); sm_in_valid = 1; sm_in_last = (i == 15); sm_in_data = 16'(int'(xv[i] * 256.0));
    end
    @(negedge clk); sm_in_valid = 0; sm_in_last = 0;
    got = 0;
    for (int c = 0; c < 300 && got < 16; c++) begin
      if (sm_out_valid) begin
        real g;
        g = real'(sm_out_data) / 256.0;
        chk(g - e[got] / s < 3.0 / 256 && e[got] / s - g < 3.0 / 256, "softmax value");
        got++;
      end
      @(negedge clk);
    end
    chk(got == 16, "softmax count");
    n_sm++;
  endtask

  task automatic run_gelu();
    int got;
    real xs [20];
    got = 0;
    for (int i = 0; i < 20; i++) begin
      xs[i] = real'(int'($urandom % 2048) - 1024) / 256.0;
      @(negedge clk); ge_in_valid = 1; ge_in_last = (i == 19); ge_in_data = 16'(int'(xs[i] * 256.0));
      #1;
      if (ge_out_valid) begin
        real g, x, ex;
        x = xs[got];
        ex = x / (1.0 + $exp(-1.702 * x));
        g = real'(ge_out_data) / 256.0;
        chk(g - ex < 0.07 && ex - g < 0.07, "gelu value");
        got++;
      end
    end
    @(negedge clk); ge_in_valid = 0; ge_in_last = 0;
    chk(ge_out_valid && ge_out_last, "gelu last");
    n_ge++;
  endtask

  task automatic run_layernorm();
    real xv [32], mean, vr;
    int got;
    mean = 0; vr = 0;
    for (int i = 0; i < 32; i++) begin xv[i] = real'(int'($urandom % 2048) - 1024) / 256.0; mean += xv[i]; end
    mean /= 32;
    for (int i = 0; i < 32; i++) vr += (xv[i] - mean) * (xv[i] - mean);
    vr /= 32;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); ln_in_valid = 1; ln_in_last = (i == 31);
      ln_in_data = 16'(int'(xv[i] * 256.0)); ln_in_gamma = 16'sd256; ln_in_beta = 16'sd0;
    end
    @(negedge clk); ln_in_valid = 0; ln_in_last = 0;
    got = 0;
    for (int c = 0; c < 600 && got < 32; c++) begin
      if (ln_out_valid) begin
        real g, ex;
        ex = (xv[got] - mean) / $sqrt(vr);
        g = real'(ln_out_data) / 256.0;
        chk(g - ex < 0.05 && ex - g < 0.05, $sformatf("layernorm %0d %f vs %f", got, g, ex));
        got++;
      end
      @(negedge clk);
    end
    chk(got == 32, "layernorm count");
    n_ln++;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
