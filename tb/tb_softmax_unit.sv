// tb_softmax_unit: rows of several lengths and value ranges; every output
// must be within 3/256 of the exact softmax (computed here with $exp), the
// row must come out complete with out_last on its last element, and the
// latency from the last input to the last output must stay within
// 2L + 60 cycles.
module tb_softmax_unit;
  import beta_pkg::*;
  localparam int MAXLEN = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, in_ready, out_valid, out_last;
  logic signed [15:0] in_data, out_data;
  int checks = 0, failures = 0;

  softmax_unit #(.MAXLEN(MAXLEN)) dut (.*);
  always #5 clk = ~clk;

  task automatic row(int L, int range_q8);
    real xv [MAXLEN];
    real e [MAXLEN];
    real s, mx;
    int got_n, cyc;
    mx = -1.0e9; s = 0.0;
    for (int i = 0; i < L; i++) begin
      int v;
      v = int'($urandom % (2 * range_q8)) - range_q8;
      xv[i] = real'(v) / 256.0;
      if (xv[i] > mx) mx = xv[i];
    end
    for (int i = 0; i < L; i++) begin e[i] = $exp(xv[i] - mx); s += e[i]; end
    while (!in_ready) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = 16'(int'(xv[i] * 256.0)); in_last = (i == L - 1);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    got_n = 0; cyc = 0;
    while (cyc < 4 * L + 200) begin
      if (out_valid) begin
        real got;
        got = real'(out_data) / 256.0;
        checks++;
        if (got - e[got_n] / s > 3.0 / 256 || e[got_n] / s - got > 3.0 / 256) begin
          failures++; $display("FAIL L=%0d i=%0d %f vs %f", L, got_n, got, e[got_n] / s);
        end
        got_n++;
        if (out_last) break;
      end
      @(negedge clk); cyc++;
    end
    checks += 2;
    if (got_n != L) begin failures++; $display("FAIL got %0d of %0d", got_n, L); end
    if (cyc > 2 * L + 60) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    row(8, 256);
    row(64, 512);
    row(17, 2048);
    row(1, 100);
    row(40, 64);
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
