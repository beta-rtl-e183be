// tb_p2s: random tiles and planes; every output bit w[n][j] must be bit
// `plane` of element (n, j), the words must pass unchanged, the flags must be
// delayed by exactly one cycle.
module tb_p2s;
  import beta_pkg::*;
  localparam int N = 2, J = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_dbl = 0, in_last = 0;
  logic [2:0] plane;
  logic [J*8-1:0] x_line;
  logic [N*J*8-1:0] b_line;
  logic out_valid, out_first, out_dbl, out_last;
  logic [7:0] x [J];
  logic [J-1:0] w [N];
  int checks = 0, failures = 0;

  p2s #(.N(N), .J(J)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    plane = 0; x_line = '0; b_line = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      logic [3:0] fl;
      @(negedge clk);
      fl = 4'($urandom);
      in_valid = 1; {in_first, in_dbl, in_last} = fl[2:0];
      plane = 3'($urandom);
      x_line = {$urandom, $urandom};
      b_line = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_first !== fl[2] || out_dbl !== fl[1] || out_last !== fl[0]) begin
        failures++; $display("FAIL flags");
      end
      for (int j = 0; j < J; j++) begin
        checks++;
        if (x[j] !== x_line[j*8 +: 8]) begin failures++; $display("FAIL x %0d", j); end
        for (int n = 0; n < N; n++) begin
          checks++;
          if (w[n][j] !== b_line[(n*J + j)*8 + plane]) begin failures++; $display("FAIL w %0d %0d", n, j); end
        end
      end
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
