// tb_compute_buffer: both regions written and read back at random addresses,
// including a read and a write of different regions in the same cycle.
module tb_compute_buffer;
  localparam int N = 2, J = 4, XD = 16, BD = 8;
  logic clk = 0;
  logic x_wr_en = 0, x_rd_en = 0, b_wr_en = 0, b_rd_en = 0;
  logic [3:0] x_wr_addr, x_rd_addr;
  logic [2:0] b_wr_addr, b_rd_addr;
  logic [J*8-1:0] x_wr_data, x_rd_data;
  logic [N*J*8-1:0] b_wr_data, b_rd_data;
  logic [J*8-1:0] xr [XD];
  logic [N*J*8-1:0] br [BD];
  int checks = 0, failures = 0;

  compute_buffer #(.N(N), .J(J), .X_DEPTH(XD), .B_DEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < XD; a++) begin
      @(negedge clk);
      x_wr_en = 1; x_wr_addr = 4'(a); x_wr_data = {$urandom}; xr[a] = x_wr_data;
      b_wr_en = (a < BD); b_wr_addr = 3'(a); b_wr_data = {$urandom, $urandom};
      if (a < BD) br[a] = b_wr_data;
    end
    @(negedge clk); x_wr_en = 0; b_wr_en = 0;
    for (int i = 0; i < 100; i++) begin
      int xa, ba;
      xa = $urandom % XD; ba = $urandom % BD;
      @(negedge clk); x_rd_en = 1; x_rd_addr = 4'(xa); b_rd_en = 1; b_rd_addr = 3'(ba);
      @(negedge clk); x_rd_en = 0; b_rd_en = 0;
      checks += 2;
      if (x_rd_data !== xr[xa]) begin failures++; $display("FAIL x %0d", xa); end
      if (b_rd_data !== br[ba]) begin failures++; $display("FAIL b %0d", ba); end
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
