// tb_transpose_unit: full tiles written back to back (the second filling while
// the first is emitted) and a partial tile closed by flush; every emitted
// column must be the column of the written rows.
module tb_transpose_unit;
  localparam int VL = 8, ACC_W = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, flush = 0;
  logic [ACC_W-1:0] in_vec [VL];
  logic out_valid;
  logic [ACC_W-1:0] out_vec [VL];
  logic [3:0] out_rows;
  logic [ACC_W-1:0] tiles [3][VL][VL];
  int rows_in [3] = '{VL, VL, 5};
  int checks = 0, failures = 0, tcol = 0, tidx = 0;

  transpose_unit #(.VL(VL), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (int'(out_rows) != rows_in[tidx]) begin failures++; $display("FAIL rows"); end
    for (int r = 0; r < rows_in[tidx]; r++) begin
      checks++;
      if (out_vec[r] !== tiles[tidx][r][tcol]) begin failures++; $display("FAIL t%0d c%0d r%0d", tidx, tcol, r); end
    end
    tcol++;
    if (tcol == VL) begin tcol = 0; tidx++; end
  end

  initial begin
    foreach (in_vec[i]) in_vec[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int r = 0; r < rows_in[t]; r++) begin
        @(posedge clk); #1;
        in_valid = 1;
        for (int c = 0; c < VL; c++) begin in_vec[c] = ACC_W'($urandom); tiles[t][r][c] = in_vec[c]; end
      end
      @(posedge clk); #1;
      in_valid = 0;
      if (t == 2) begin flush = 1; @(posedge clk); #1; flush = 0; end
    end
    repeat (3 * VL) @(posedge clk);
    checks++;
    if (tidx != 3) begin failures++; $display("FAIL only %0d tiles", tidx); end
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
