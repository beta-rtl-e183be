// tb_dpu: the dot product unit in every precision, for activation x weight
// (one bit-plane) and activation x activation (b bit-planes, MSB first), over
// several J-element chunks. Each lane is compared with an integer dot product
// computed here; the result must appear exactly one cycle after the last step.
module tb_dpu;
  import beta_pkg::*;
  localparam int J = 16, ACC_W = 32, MAXC = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, dbl = 0, last = 0;
  prec_e prec;
  logic [7:0]  x [J];
  logic [J-1:0] w;
  logic out_valid;
  logic [ACC_W-1:0] res [MAX_LANES];
  int checks = 0, failures = 0;

  // operands: A[chunk][j] packed words, B[chunk][j] values of xb bits
  logic [7:0] A [MAXC][J];
  logic [7:0] B [MAXC][J];

  dpu #(.J(J), .ACC_W(ACC_W)) dut (.clk, .rst_n, .prec, .in_valid, .first, .dbl, .last, .x, .w,
                                   .out_valid, .res);
  always #5 clk = ~clk;

  task automatic run(prec_e p, int xb, int nc);
    int bits, lanes;
    longint exp_l [MAX_LANES];
    bits = 8 >> p; lanes = 1 << p;
    prec = p;
    for (int c = 0; c < nc; c++)
      for (int j = 0; j < J; j++) begin
        A[c][j] = 8'($urandom);
        B[c][j] = 8'($urandom) & 8'((1 << xb) - 1);
      end
    foreach (exp_l[l]) begin
      exp_l[l] = 0;
      if (l < lanes)
        for (int c = 0; c < nc; c++)
          for (int j = 0; j < J; j++)
            exp_l[l] += longint'((A[c][j] >> (l * bits)) & ((1 << bits) - 1)) * longint'(B[c][j]);
    end
    for (int t = 0; t < xb; t++)
      for (int c = 0; c < nc; c++) begin
        @(negedge clk);
        in_valid = 1;
        first = (t == 0 && c == 0);
        dbl   = (t != 0 && c == 0);
        last  = (t == xb - 1 && c == nc - 1);
        for (int j = 0; j < J; j++) begin
          x[j] = A[c][j];
          w[j] = B[c][j][xb - 1 - t];
        end
      end
    @(negedge clk);
    in_valid = 0; last = 0;
    // out_valid must be high now, one cycle after the last step
    checks++;
    if (!out_valid) begin failures++; $display("FAIL latency prec=%0d xb=%0d", p, xb); end
    foreach (exp_l[l]) begin
      checks++;
      if (res[l] !== ACC_W'(exp_l[l])) begin
        failures++;
        $display("FAIL prec=%0d xb=%0d lane %0d: %0d vs %0d", p, xb, l, res[l], exp_l[l]);
      end
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
  endtask

  initial begin
    prec = PREC_A8;
    foreach (x[j]) x[j] = '0;
    w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      for (int p = 0; p < 4; p++) begin
        run(prec_e'(p), 1, 1 + rep % MAXC);            // activation x weight
        run(prec_e'(p), 8 >> p, 1 + (rep + 1) % MAXC); // activation x activation
      end
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
