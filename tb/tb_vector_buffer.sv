// tb_vector_buffer: host and vector-unit writes (the vector unit wins a
// same-cycle conflict and host_wr_ready drops), then all four read ports
// checked against a copy kept here.
module tb_vector_buffer;
  import beta_pkg::*;
  localparam int VL = 4, DEPTH = 8;
  logic clk = 0;
  logic [2:0] k_addr, b_addr, x_addr, v_wr_addr, h_rd_addr, h_wr_addr;
  logic signed [15:0] k_data [VL], b_data [VL], x_data [VL], h_rd_data [VL];
  logic signed [15:0] v_wr_data [VL], h_wr_data [VL];
  logic v_wr_en = 0, h_wr_en = 0, host_wr_ready;
  logic signed [15:0] m [DEPTH][VL];
  int checks = 0, failures = 0;

  vector_buffer #(.VL(VL), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    k_addr = 0; b_addr = 0; x_addr = 0; h_rd_addr = 0; v_wr_addr = 0; h_wr_addr = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      h_wr_en = 1; h_wr_addr = 3'(a);
      foreach (h_wr_data[i]) begin h_wr_data[i] = 16'($urandom); m[a][i] = h_wr_data[i]; end
    end
    // conflict: both write, vector unit to 2, host to 5 (host write dropped)
    @(negedge clk);
    v_wr_en = 1; v_wr_addr = 3'd2; h_wr_addr = 3'd5;
    foreach (v_wr_data[i]) begin v_wr_data[i] = 16'($urandom); m[2][i] = v_wr_data[i]; end
    foreach (h_wr_data[i]) h_wr_data[i] = 16'($urandom);
    #1;
    checks++;
    if (host_wr_ready) begin failures++; $display("FAIL ready"); end
    @(negedge clk);
    v_wr_en = 0; h_wr_en = 0;
    for (int it = 0; it < 50; it++) begin
      int a0, a1, a2, a3;
      a0 = $urandom % DEPTH; a1 = $urandom % DEPTH; a2 = $urandom % DEPTH; a3 = $urandom % DEPTH;
      k_addr = 3'(a0); b_addr = 3'(a1); x_addr = 3'(a2); h_rd_addr = 3'(a3);
      @(negedge clk);
      for (int i = 0; i < VL; i++) begin
        checks += 4;
        if (k_data[i] !== m[a0][i]) begin failures++; $display("FAIL k"); end
        if (b_data[i] !== m[a1][i]) begin failures++; $display("FAIL b"); end
        if (x_data[i] !== m[a2][i]) begin failures++; $display("FAIL x"); end
        if (h_rd_data[i] !== m[a3][i]) begin failures++; $display("FAIL h"); end
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
