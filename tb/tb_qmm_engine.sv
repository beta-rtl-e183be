// tb_qmm_engine: complete matrix products through the QMM engine.
// For every activation precision it runs (a) activation x binary weight, with
// the weights written to the weight buffer and copied into the compute
// buffer, results on out1, and (b) activation x activation with a second
// operand of the same precision, results on out2 through the transpose unit.
// Each result element is compared with an integer product computed here, and
// the time from start to done must be rowgroups x colgroups x xbits x chunks
// steps (one per cycle) plus the fixed 7-cycle pipeline/drain overhead.
module tb_qmm_engine;
  import beta_pkg::*;
  localparam int N = 2, J = 16, VL = 16, ACC_W = 32;
  localparam int XD = 64, BD = 32, WD = 32;
  localparam int M = 8, D = 32, K = 4;          // A is M x D, B is D x K
  localparam int C = D / J;

  logic clk = 0, rst_n = 0;
  logic x_wr_en = 0, b_wr_en = 0, wb_wr_en = 0, cp_start = 0, start = 0;
  logic [5:0] x_wr_addr; logic [J*8-1:0] x_wr_data;
  logic [4:0] b_wr_addr; logic [N*J*8-1:0] b_wr_data;
  logic [4:0] wb_wr_addr; logic [N*J-1:0] wb_wr_data;
  logic [4:0] cp_src, cp_dst; logic [15:0] cp_len; logic cp_busy;
  qmm_desc_t desc_in;
  logic busy, done, out1_valid, out2_valid;
  logic [ACC_W-1:0] out1_vec [VL], out2_vec [VL];
  logic [4:0] out1_cnt, out2_rows;
  int checks = 0, failures = 0;

  qmm_engine #(.N(N), .J(J), .VL(VL), .ACC_W(ACC_W), .X_DEPTH(XD), .B_DEPTH(BD), .WB_DEPTH(WD))
    dut (.clk, .rst_n, .x_wr_en, .x_wr_addr, .x_wr_data, .b_wr_en, .b_wr_addr, .b_wr_data,
         .wb_wr_en, .wb_wr_addr, .wb_wr_data, .cp_start, .cp_src, .cp_dst, .cp_len, .cp_busy,
         .start, .desc_in, .busy, .done, .out1_valid, .out1_vec, .out1_cnt,
         .out2_valid, .out2_vec, .out2_rows);
  always #5 clk = ~clk;

  int A [M][D];
  int B [D][K];
  longint stream1 [$];
  longint s2 [256];
  int n_out2, tile_base, col, tile_rows;

  always @(posedge clk) if (rst_n && out1_valid)
    for (int i = 0; i < int'(out1_cnt); i++) stream1.push_back(longint'(out1_vec[i]));

  always @(posedge clk) if (rst_n && out2_valid) begin
    for (int r = 0; r < int'(out2_rows); r++) s2[(tile_base + r) * VL + col] = longint'(out2_vec[r]);
    col++;
    if (col == VL) begin col = 0; tile_base += int'(out2_rows); end
  end

  task automatic run(prec_e p, qmm_type_e qt);
    int bits, P, R, G, X, steps, cyc;
    longint expv [$];
    bits = 8 >> p; P = 1 << p; R = M / P; G = K / N;
    X = (qt == QMM_AW) ? 1 : bits;
    foreach (A[m, d]) A[m][d] = $urandom % (1 << bits);
    foreach (B[d, k]) B[d][k] = $urandom % (1 << X);
    // activation entries: (rg, c) at rg*C + c
    for (int rg = 0; rg < R; rg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        x_wr_en = 1; x_wr_addr = 6'(rg * C + c);
        for (int j = 0; j < J; j++) begin
          logic [7:0] wv;
          wv = '0;
          for (int l = 0; l < P; l++) wv |= 8'(A[rg * P + l][c * J + j] << (l * bits));
          x_wr_data[j*8 +: 8] = wv;
        end
      end
    @(negedge clk); x_wr_en = 0;
    // second operand: (cg, c) at cg*C + c
    for (int cg = 0; cg < G; cg++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        if (qt == QMM_AW) begin
          wb_wr_en = 1; wb_wr_addr = 5'(3 + cg * C + c);
          for (int n = 0; n < N; n++)
            for (int j = 0; j < J; j++) wb_wr_data[n*J + j] = 1'(B[c * J + j][cg * N + n]);
        end else begin
          b_wr_en = 1; b_wr_addr = 5'(cg * C + c);
          for (int n = 0; n < N; n++)
            for (int j = 0; j < J; j++) b_wr_data[(n*J + j)*8 +: 8] = 8'(B[c * J + j][cg * N + n]);
        end
      end
    @(negedge clk); wb_wr_en = 0; b_wr_en = 0;
    if (qt == QMM_AW) begin
      // copy the weight tiles (written at weight-buffer entry 3) into the compute buffer
      cp_start = 1; cp_src = 5'd3; cp_dst = 5'd0; cp_len = 16'(G * C);
      @(negedge clk); cp_start = 0;
      while (cp_busy) @(negedge clk);
      @(negedge clk);
    end
    // expected stream
    for (int rg = 0; rg < R; rg++)
      for (int cg = 0; cg < G; cg++)
        for (int l = 0; l < P; l++)
          for (int n = 0; n < N; n++) begin
            longint s;
            s = 0;
            for (int d = 0; d < D; d++) s += longint'(A[rg * P + l][d]) * longint'(B[d][cg * N + n]);
            expv.push_back(s);
          end
    stream1.delete(); n_out2 = 0; tile_base = 0; col = 0;
    desc_in = '0;
    desc_in.qtype = qt; desc_in.prec = p; desc_in.xbits = 4'(X);
    desc_in.x_base = 0; desc_in.b_base = 0; desc_in.n_chunks = 16'(C);
    desc_in.n_rowgrp = 16'(R); desc_in.n_colgrp = 16'(G);
    desc_in.out_sel = (qt == QMM_AW) ? OUT_VPU : OUT_TRAN;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    steps = R * G * X * C;
    checks++;
    if (cyc != steps + 7) begin failures++; $display("FAIL cycles %0d, expected %0d", cyc, steps + 7); end
    repeat (2 * VL + 4) @(negedge clk);
    for (int i = 0; i < expv.size(); i++) begin
      longint got;
      got = (qt == QMM_AW) ? ((i < stream1.size()) ? stream1[i] : -1) : s2[i];
      checks++;
      if (got != expv[i]) begin
        failures++;
        if (failures < 10) $display("FAIL prec=%0d qt=%0d elem %0d: %0d vs %0d", p, qt, i, got, expv[i]);
      end
    end
    if (qt == QMM_AW) begin
      checks++;
      if (stream1.size() != expv.size()) begin failures++; $display("FAIL %0d results", stream1.size()); end
    end
  endtask

  initial begin
    desc_in = '0; cp_src = '0; cp_dst = '0; cp_len = '0;
    x_wr_addr = '0; b_wr_addr = '0; wb_wr_addr = '0;
    x_wr_data = '0; b_wr_data = '0; wb_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      run(prec_e'(p), QMM_AW);
      run(prec_e'(p), QMM_AA);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
