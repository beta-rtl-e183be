// tb_pe: exhaustive check of the PE (every 8-bit word against both bit values).
module tb_pe;
  import beta_pkg::*;
  logic [7:0] x, y;
  logic       w;
  int checks = 0, failures = 0;

  pe dut (.x, .w, .y);

  initial begin
    for (int i = 0; i < 512; i++) begin
      x = 8'(i);
      w = i[8];
      #1;
      checks++;
      if (y !== (w ? x : 8'd0)) begin
        failures++;
        $display("FAIL x=%h w=%b y=%h", x, w, y);
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
