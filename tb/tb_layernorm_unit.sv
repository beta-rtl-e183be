// tb_layernorm_unit: rows of several lengths with random scale and shift;
// each output must be within 0.05 of (x - mean)/sqrt(var) * g + b computed
// here in floating point, and the row must come out complete.
module tb_layernorm_unit;
  import beta_pkg::*;
  localparam int MAXLEN = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, in_ready, out_valid, out_last;
  logic signed [15:0] in_data, in_gamma, in_beta, out_data;
  int checks = 0, failures = 0;

  layernorm_unit #(.MAXLEN(MAXLEN)) dut (.*);
  always #5 clk = ~clk;

  task automatic row(int L, int range_q8);
    real xv [MAXLEN], gv [MAXLEN], bv [MAXLEN];
    real mean, vr;
    int got_n, cyc;
    mean = 0; vr = 0;
    for (int i = 0; i < L; i++) begin
      xv[i] = real'(int'($urandom % (2 * range_q8)) - range_q8 + range_q8 / 3) / 256.0;
      gv[i] = real'(int'($urandom % 512)) / 256.0;
      bv[i] = real'(int'($urandom % 512) - 256) / 256.0;
      mean += xv[i];
    end
    mean /= L;
    for (int i = 0; i < L; i++) vr += (xv[i] - mean) * (xv[i] - mean);
    vr /= L;
    while (!in_ready) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      in_valid = 1; in_last = (i == L - 1);
      in_data = 16'(int'(xv[i] * 256.0)); in_gamma = 16'(int'(gv[i] * 256.0)); in_beta = 16'(int'(bv[i] * 256.0));
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    got_n = 0; cyc = 0;
    while (cyc < 4 * L + 400) begin
      if (out_valid) begin
        real got, e;
        got = real'(out_data) / 256.0;
        e = (xv[got_n] - mean) / $sqrt(vr + 1.0e-5) * gv[got_n] + bv[got_n];
        checks++;
        if (got - e > 0.05 || e - got > 0.05) begin
          failures++; $display("FAIL L=%0d i=%0d %f vs %f", L, got_n, got, e);
        end
        got_n++;
        if (out_last) break;
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (got_n != L) begin failures++; $display("FAIL got %0d of %0d", got_n, L); end
  endtask

  initial begin
    in_data = 0; in_gamma = 0; in_beta = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    row(8, 256);
    row(64, 1024);
    row(48, 4096);
    row(20, 64);
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
