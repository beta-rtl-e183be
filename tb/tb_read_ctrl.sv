// tb_read_ctrl: for random loop sizes the sequencer must issue exactly
// rowgroups x colgroups x xbits x chunks steps, one per cycle, in the order
// rg > cg > bit-plane (MSB first) > chunk, with the right first/dbl/last
// flags; flush and done must follow after the drain time.
module tb_read_ctrl;
  import beta_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  qmm_desc_t desc_in, desc;
  logic busy, done, flush, step_valid, first, dbl, last;
  logic [15:0] rg, cg, ch;
  logic [2:0] plane;
  int checks = 0, failures = 0;

  read_ctrl #(.DRAIN(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    desc_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      int R, G, X, C, steps, cyc;
      R = 1 + $urandom % 3; G = 1 + $urandom % 3; X = 1 + $urandom % 8; C = 1 + $urandom % 4;
      @(negedge clk);
      desc_in = '0;
      desc_in.xbits = 4'(X); desc_in.n_chunks = 16'(C);
      desc_in.n_rowgrp = 16'(R); desc_in.n_colgrp = 16'(G);
      start = 1;
      @(negedge clk);
      start = 0;
      steps = 0;
      for (int r = 0; r < R; r++)
        for (int g = 0; g < G; g++)
          for (int t = 0; t < X; t++)
            for (int c = 0; c < C; c++) begin
              checks++;
              if (!step_valid || rg != 16'(r) || cg != 16'(g) || ch != 16'(c) ||
                  plane != 3'(X - 1 - t) || first != (t == 0 && c == 0) ||
                  dbl != (t != 0 && c == 0) || last != (t == X - 1 && c == C - 1)) begin
                failures++;
                $display("FAIL step r%0d g%0d t%0d c%0d", r, g, t, c);
              end
              steps++;
              @(negedge clk);
            end
      checks++;
      if (step_valid) begin failures++; $display("FAIL extra step"); end
      cyc = 0;
      while (!done && cyc < 20) begin
        if (flush) begin checks++; if (cyc != 5) begin failures++; $display("FAIL flush at %0d", cyc); end end
        @(negedge clk); cyc++;
      end
      checks++;
      if (!done || busy !== 1'b0 && cyc == 0) begin failures++; $display("FAIL done"); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
