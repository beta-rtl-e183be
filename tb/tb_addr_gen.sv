// tb_addr_gen: random descriptors and loop indices against the layout formula.
module tb_addr_gen;
  import beta_pkg::*;
  localparam int XAW = 11, BAW = 10;
  qmm_desc_t desc;
  logic [15:0] rg, cg, ch;
  logic [XAW-1:0] x_addr;
  logic [BAW-1:0] b_addr;
  int checks = 0, failures = 0;

  addr_gen #(.XAW(XAW), .BAW(BAW)) dut (.*);

  initial begin
    for (int i = 0; i < 1000; i++) begin
      desc = '0;
      desc.x_base = 16'($urandom % 512); desc.b_base = 16'($urandom % 256);
      desc.n_chunks = 16'(1 + $urandom % 12);
      rg = 16'($urandom % 64); cg = 16'($urandom % 64); ch = 16'($urandom % desc.n_chunks);
      #1;
      checks += 2;
      if (x_addr !== XAW'(desc.x_base + rg * desc.n_chunks + ch)) begin failures++; $display("FAIL x"); end
      if (b_addr !== BAW'(desc.b_base + cg * desc.n_chunks + ch)) begin failures++; $display("FAIL b"); end
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
