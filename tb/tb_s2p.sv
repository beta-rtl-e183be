// tb_s2p: groups of N x P results in every precision are packed into VL
// vectors; full vectors and a flushed partial vector are checked element by
// element and by count.
module tb_s2p;
  import beta_pkg::*;
  localparam int N = 2, VL = 16, ACC_W = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, flush = 0;
  prec_e prec;
  logic [ACC_W-1:0] res [N][MAX_LANES];
  logic vec_valid;
  logic [ACC_W-1:0] vec [VL];
  logic [4:0] vec_cnt;
  logic [ACC_W-1:0] q [$];
  int checks = 0, failures = 0, nvec = 0;

  s2p #(.N(N), .VL(VL), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  // compare every emitted vector with the expected element stream
  always @(posedge clk) if (rst_n && vec_valid) begin
    nvec++;
    for (int i = 0; i < int'(vec_cnt); i++) begin
      checks++;
      if (q.size() == 0 || vec[i] !== q[0]) begin failures++; $display("FAIL elem %0d %h %h q%0d cnt%0d", i, vec[i], q[0], q.size(), vec_cnt); end
      if (q.size() != 0) void'(q.pop_front());
    end
  end

  initial begin
    prec = PREC_A8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      int lanes, groups;
      lanes = 1 << p;
      prec = prec_e'(p);
      groups = 2 * VL / (N * lanes) + 1;        // two full vectors and a partial one
      for (int g = 0; g < groups; g++) begin
        @(negedge clk);
        in_valid = 1;
        for (int l = 0; l < MAX_LANES; l++)
          for (int n = 0; n < N; n++) begin
            res[n][l] = ACC_W'($urandom);
            if (l < lanes) q.push_back(res[n][l]);
          end
        @(negedge clk);
        in_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      @(negedge clk); flush = 1;
      @(negedge clk); flush = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (q.size() != 0) begin failures++; $display("FAIL %0d elements left", q.size()); q.delete(); end
    end
    checks++;
    if (nvec != 12) begin failures++; $display("FAIL %0d vectors", nvec); end
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
