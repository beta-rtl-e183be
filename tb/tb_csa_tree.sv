// tb_csa_tree: random operand sets for trees of several sizes (including ones
// that need the 3:2 row); s + c must equal the sum of all operands.
module tb_csa_tree;
  localparam int W = 24;
  int checks = 0, failures = 0;

  logic [W-1:0] o7 [7];   logic [W-1:0] s7, c7;
  logic [W-1:0] o18 [18]; logic [W-1:0] s18, c18;
  logic [W-1:0] o258 [258]; logic [W-1:0] s258, c258;

  csa_tree #(.NIN(7),   .W(W)) u7   (.ops(o7),   .s(s7),   .c(c7));
  csa_tree #(.NIN(18),  .W(W)) u18  (.ops(o18),  .s(s18),  .c(c18));
  csa_tree #(.NIN(258), .W(W)) u258 (.ops(o258), .s(s258), .c(c258));

  initial begin
    for (int it = 0; it < 300; it++) begin
      logic [W-1:0] r7, r18, r258;
      r7 = '0; r18 = '0; r258 = '0;
      foreach (o7[k])   begin o7[k]   = W'($urandom); r7   += o7[k];   end
      foreach (o18[k])  begin o18[k]  = W'($urandom); r18  += o18[k];  end
      foreach (o258[k]) begin o258[k] = (it % 2) ? W'($urandom) : W'($urandom % 256); r258 += o258[k]; end
      #1;
      checks += 3;
      if (W'(s7 + c7) !== r7)       begin failures++; $display("FAIL 7"); end
      if (W'(s18 + c18) !== r18)    begin failures++; $display("FAIL 18"); end
      if (W'(s258 + c258) !== r258) begin failures++; $display("FAIL 258"); end
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
