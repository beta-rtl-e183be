// vpu: vector process unit, the full-precision stage of the computation flow.
//
// After reordering, a binary-transformer product (alpha*A + gamma)(beta*W)
// becomes integer products scaled by fused full-precision constants:
// A*W*(alpha*beta) + 1*W*(gamma*beta). The QMM engine produces the integer
// products; this unit applies, lane by lane over VL lanes (one multiplier per
// lane),
//     y[i] = sat16( (x[i] * k[i]) >>> FIX_FRAC + b[i] )
// with k (coefficient) and b (offset) FIX-16 vectors read from the vector
// buffer and y written back to it.
// Two sources of x:
//   stream : an integer result vector from the QMM engine (out1); k and b come
//            from the configured addresses cfg_k / cfg_b and y goes to
//            cfg_dst, cfg_dst+1, ... (the pointer restarts on cfg_load);
//   command: cmd_valid with cmd_x (a FIX-16 vector of the buffer), cmd_k,
//            cmd_b, cmd_dst, so that terms can be chained (y of one command
//            is the b of the next).
// Timing: the result is written, and shown on y/y_valid, the cycle after the
// input. Stream vectors and commands must not arrive in the same cycle.
// The function follows the paper; the exact operation and ports are this
// design's choice.
module vpu
  import beta_pkg::*;
#(
  parameter int unsigned VL    = 64,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned AW    = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration of the stream path
  input  logic                    cfg_load,
  input  logic [AW-1:0]           cfg_k,
  input  logic [AW-1:0]           cfg_b,
  input  logic [AW-1:0]           cfg_dst,
  // stream input from the QMM engine
  input  logic                    s_valid,
  input  logic [ACC_W-1:0]        s_vec [VL],
  // command input
  input  logic                    cmd_valid,
  input  logic [AW-1:0]           cmd_x,
  input  logic [AW-1:0]           cmd_k,
  input  logic [AW-1:0]           cmd_b,
  input  logic [AW-1:0]           cmd_dst,
  // vector buffer
  output logic [AW-1:0]           vb_k_addr,
  input  logic signed [FIX_W-1:0] vb_k_data [VL],
  output logic [AW-1:0]           vb_b_addr,
  input  logic signed [FIX_W-1:0] vb_b_data [VL],
  output logic [AW-1:0]           vb_x_addr,
  input  logic signed [FIX_W-1:0] vb_x_data [VL],
  output logic                    vb_wr_en,
  output logic [AW-1:0]           vb_wr_addr,
  output logic signed [FIX_W-1:0] vb_wr_data [VL],
  // result
  output logic                    y_valid,
  output logic signed [FIX_W-1:0] y [VL]
);
  logic [AW-1:0]    r_k, r_b, r_dst, ptr;
  logic             s1_valid, s1_cmd;
  logic [AW-1:0]    s1_dst;
  logic [ACC_W-1:0] s1_vec [VL];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_k      <= '0;
      r_b      <= '0;
      r_dst    <= '0;
      ptr      <= '0;
      s1_valid <= 1'b0;
      s1_cmd   <= 1'b0;
      s1_dst   <= '0;
    end else begin
      if (cfg_load) begin
        r_k   <= cfg_k;
        r_b   <= cfg_b;
        r_dst <= cfg_dst;
        ptr   <= cfg_dst;
      end else if (s_valid) begin
        ptr <= ptr + AW'(1);
      end
      s1_valid <= s_valid | cmd_valid;
      s1_cmd   <= cmd_valid;
      s1_dst   <= cmd_valid ? cmd_dst : ptr;
    end
  end

  always_ff @(posedge clk) if (s_valid) s1_vec <= s_vec;

  assign vb_k_addr = cmd_valid ? cmd_k : (cfg_load ? cfg_k : r_k);
  assign vb_b_addr = cmd_valid ? cmd_b : (cfg_load ? cfg_b : r_b);
  assign vb_x_addr = cmd_x;

  // One multiplier per lane.
  always_comb begin
    for (int i = 0; i < int'(VL); i++) begin
      logic signed [63:0] xv, pv;
      xv = s1_cmd ? 64'(vb_x_data[i]) : $signed({32'd0, 32'(s1_vec[i])});
      pv = (xv * 64'(vb_k_data[i])) >>> FIX_FRAC;
      y[i] = sat_fix(pv + 64'(vb_b_data[i]));
    end
  end

  assign y_valid    = s1_valid;
  assign vb_wr_en   = s1_valid;
  assign vb_wr_addr = s1_dst;
  assign vb_wr_data = y;

  assert property (@(posedge clk) disable iff (!rst_n) !(s_valid && cmd_valid));
endmodule
