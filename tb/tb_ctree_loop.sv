// tb_ctree_loop: random sequences of first/dbl steps against a behavioural
// accumulator acc = (first ? 0 : dbl ? 2*acc : acc) + sum(ops).
module tb_ctree_loop;
  localparam int NIN = 9, W = 28;
  logic clk = 0, rst_n = 0, en = 0, first = 0, dbl = 0;
  logic [W-1:0] ops [NIN];
  logic [W-1:0] s, c, model;
  int checks = 0, failures = 0;

  ctree_loop #(.NIN(NIN), .W(W)) dut (.clk, .rst_n, .en, .first, .dbl, .ops, .s, .c);

  always #5 clk = ~clk;

  initial begin
    model = '0;
    foreach (ops[k]) ops[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      en    = ($urandom % 4) != 0;
      first = (i == 0) || (($urandom % 6) == 0);
      dbl   = ($urandom % 2);
      foreach (ops[k]) ops[k] = W'($urandom % 256);
      if (en) begin
        logic [W-1:0] sum;
        sum = '0;
        foreach (ops[k]) sum += ops[k];
        model = (first ? '0 : (dbl ? model << 1 : model)) + sum;
      end
      @(posedge clk); #1;
      checks++;
      if (W'(s + c) !== model) begin
        failures++;
        $display("FAIL step %0d: %h vs %h", i, W'(s + c), model);
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
