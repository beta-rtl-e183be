// tb_comp42: random operands; the two outputs must add up to the four inputs.
module tb_comp42;
  localparam int W = 20;
  logic [W-1:0] a, b, c, d, s, co;
  int checks = 0, failures = 0;

  comp42 #(.W(W)) dut (.a, .b, .c, .d, .s, .co);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      a = W'($urandom); b = W'($urandom); c = W'($urandom); d = W'($urandom);
      if (i < 4) begin a = '1; b = '1; c = '1; d = '1; end
      #1;
      checks++;
      if (W'(s + co) !== W'(a + b + c + d)) begin
        failures++;
        $display("FAIL %h %h %h %h -> %h %h", a, b, c, d, s, co);
      end
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
