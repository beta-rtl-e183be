// tb_vpu: the vector unit with a vector buffer. Stream vectors (integer
// results) and buffer commands (FIX-16 operands) are scaled and offset;
// each result lane is compared with sat16((x*k) >> 8 + b) computed here, both
// on the y output one cycle later and in the buffer at the destination.
module tb_vpu;
  import beta_pkg::*;
  localparam int VL = 8, ACC_W = 32, AW = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_load = 0, s_valid = 0, cmd_valid = 0;
  logic [AW-1:0] cfg_k, cfg_b, cfg_dst, cmd_x, cmd_k, cmd_b, cmd_dst;
  logic [ACC_W-1:0] s_vec [VL];
  logic [AW-1:0] vb_k_addr, vb_b_addr, vb_x_addr, vb_wr_addr, h_rd_addr, h_wr_addr;
  logic signed [15:0] vb_k_data [VL], vb_b_data [VL], vb_x_data [VL], vb_wr_data [VL];
  logic signed [15:0] h_rd_data [VL], h_wr_data [VL], y [VL];
  logic vb_wr_en, h_wr_en = 0, host_wr_ready, y_valid;
  logic signed [15:0] m [16][VL];
  int checks = 0, failures = 0, nsat = 0;

  vpu #(.VL(VL), .ACC_W(ACC_W), .AW(AW)) dut (.*);
  vector_buffer #(.VL(VL), .DEPTH(16)) vb (
    .clk, .k_addr(vb_k_addr), .k_data(vb_k_data), .b_addr(vb_b_addr), .b_data(vb_b_data),
    .x_addr(vb_x_addr), .x_data(vb_x_data), .v_wr_en(vb_wr_en), .v_wr_addr(vb_wr_addr),
    .v_wr_data(vb_wr_data), .h_rd_addr, .h_rd_data, .h_wr_en, .h_wr_addr, .h_wr_data, .host_wr_ready);
  always #5 clk = ~clk;

  function automatic logic signed [15:0] ref_y(longint x, longint k, longint b);
    longint v;
    v = ((x * k) >>> 8) + b;
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  task automatic check_y(logic signed [15:0] e [VL], int dst);
    for (int i = 0; i < VL; i++) begin
      checks++;
      if (!y_valid || y[i] !== e[i]) begin failures++; $display("FAIL lane %0d: %0d vs %0d", i, y[i], e[i]); end
      if (e[i] == 16'sh7fff || e[i] == 16'sh8000) nsat++;
      m[dst][i] = e[i];
    end
  endtask

  initial begin
    cfg_k = 0; cfg_b = 0; cfg_dst = 0; cmd_x = 0; cmd_k = 0; cmd_b = 0; cmd_dst = 0; h_rd_addr = 0;
    foreach (s_vec[i]) s_vec[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // coefficient vectors in 0..3 (host writes)
    for (int a = 0; a < 4; a++) begin
      @(negedge clk);
      h_wr_en = 1; h_wr_addr = 4'(a);
      foreach (h_wr_data[i]) begin h_wr_data[i] = 16'(int'($urandom % 2048) - 1024); m[a][i] = h_wr_data[i]; end
    end
    @(negedge clk); h_wr_en = 0;
    // stream: k = entry 0, b = entry 1, results to 8, 9, 10
    cfg_load = 1; cfg_k = 0; cfg_b = 1; cfg_dst = 8;
    @(negedge clk); cfg_load = 0;
    for (int v = 0; v < 3; v++) begin
      logic signed [15:0] e [VL];
      @(negedge clk);
      s_valid = 1;
      foreach (s_vec[i]) begin
        s_vec[i] = (v == 2) ? 32'($urandom % 100000) : 32'($urandom % 4096);
        e[i] = ref_y(longint'(s_vec[i]), longint'(m[0][i]), longint'(m[1][i]));
      end
      @(negedge clk);
      s_valid = 0;
      check_y(e, 8 + v);
    end
    // command: x = entry 8, k = entry 2, b = entry 9 -> 12 (chained terms)
    begin
      logic signed [15:0] e [VL];
      @(negedge clk);
      cmd_valid = 1; cmd_x = 8; cmd_k = 2; cmd_b = 9; cmd_dst = 12;
      foreach (e[i]) e[i] = ref_y(longint'(m[8][i]), longint'(m[2][i]), longint'(m[9][i]));
      @(negedge clk);
      cmd_valid = 0;
      check_y(e, 12);
    end
    // read back destinations through the host port
    foreach (m[a]) if (a inside {8, 9, 10, 12}) begin
      h_rd_addr = 4'(a);
      @(negedge clk);
      for (int i = 0; i < VL; i++) begin
        checks++;
        if (h_rd_data[i] !== m[a][i]) begin failures++; $display("FAIL stored %0d", a); end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
