// tb_weight_buffer: random writes, then reads against a copy kept here;
// read data must appear one cycle after the read.
module tb_weight_buffer;
  localparam int N = 2, J = 8, DEPTH = 40;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr, rd_addr;
  logic [N*J-1:0] wr_data, rd_data;
  logic [N*J-1:0] ref_m [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.N(N), .J(J), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a); wr_data = (N*J)'($urandom); ref_m[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 100; i++) begin
      int a;
      a = $urandom % DEPTH;
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== ref_m[a]) begin failures++; $display("FAIL addr %0d", a); end
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
