// tb_gelu_unit: a sweep of Q7.8 inputs over [-8, 8) streamed back to back;
// each output must be within 0.07 of the exact GELU x * Phi(x) (computed here
// with an erf series) and arrive one cycle after its input.
module tb_gelu_unit;
  import beta_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, out_valid, out_last;
  logic signed [15:0] in_data, out_data;
  real expq [$];
  int checks = 0, failures = 0, nout = 0;

  gelu_unit dut (.*);
  always #5 clk = ~clk;

  function automatic real erf_r(real z);
    // Abramowitz-Stegun 7.1.26, error < 1.5e-7
    real t, y, s;
    s = (z < 0) ? -1.0 : 1.0;
    z = (z < 0) ? -z : z;
    t = 1.0 / (1.0 + 0.3275911 * z);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t + 0.254829592) * t * $exp(-z * z);
    return s * y;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    real got, e;
    got = real'(out_data) / 256.0;
    e = expq.pop_front();
    checks++;
    nout++;
    if (got - e > 0.07 || e - got > 0.07) begin failures++; $display("FAIL %f vs %f", got, e); end
  end

  initial begin
    in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = -2048; v < 2048; v += 3) begin
      real x;
      @(negedge clk);
      in_valid = 1; in_data = 16'(v); in_last = (v + 3 >= 2048);
      x = real'(v) / 256.0;
      expq.push_back(0.5 * x * (1.0 + erf_r(x / $sqrt(2.0))));
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (nout != 1366) begin failures++; $display("FAIL %0d outputs", nout); end
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
