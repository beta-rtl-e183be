// tb_csel_adder: random and corner operands against the + operator.
module tb_csel_adder;
  localparam int W = 32;
  logic [W-1:0] a, b, sum;
  logic [29:0] a2, b2, sum2;
  int checks = 0, failures = 0;

  csel_adder #(.W(W), .BLK(8)) dut (.a, .b, .sum);
  csel_adder #(.W(30), .BLK(7)) dut2 (.a(a2), .b(b2), .sum(sum2));

  initial begin
    for (int i = 0; i < 3000; i++) begin
      a = $urandom; b = $urandom;
      if (i == 0) begin a = '1; b = 1; end
      if (i == 1) begin a = 32'h00ff_ff00; b = 32'h0000_0100; end
      a2 = 30'(a); b2 = 30'(b);
      #1;
      checks += 2;
      if (sum !== a + b)   begin failures++; $display("FAIL %h + %h = %h", a, b, sum); end
      if (sum2 !== 30'(a2 + b2)) begin failures++; $display("FAIL2 %h + %h = %h", a2, b2, sum2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
