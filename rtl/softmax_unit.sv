// softmax_unit: softmax over a row of FIX-16 values, streamed in and out.
//
// A row of up to MAXLEN Q7.8 values enters one per cycle (in_last marks its
// end) and is stored. Four phases follow:
//   IN   store the row and track its maximum m;
//   EXP  for each element e_i = exp(x_i - m) as 2^u with u = (x_i - m) * log2(e)
//        (log2 e ~= 1477/1024): the integer part of u is a right shift and
//        2^f for the fractional part f is 1 + 0.6565 f + 0.3435 f^2; e_i is kept
//        with 16 fractional bits and summed;
//   DIV  one reciprocal 2^40 / sum on a sequential divider (49 cycles);
//   OUT  y_i = e_i * reciprocal, one per cycle, in Q7.8, out_last on the last.
// Subtracting the maximum keeps every e_i in (0, 1], so nothing overflows.
// Latency for a row of L elements: about 2L + 52 cycles after its last input;
// in_ready is low from in_last until the row has left.
// The paper keeps softmax in full precision but does not give its circuit;
// this circuit is this design's choice.
module softmax_unit
  import beta_pkg::*;
#(
  parameter int unsigned MAXLEN = 1024,
  localparam int unsigned LW    = $clog2(MAXLEN + 1),
  localparam int unsigned IW    = $clog2(MAXLEN)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic signed [FIX_W-1:0] in_data,
  output logic                    in_ready,
  output logic                    out_valid,
  output logic                    out_last,
  output logic signed [FIX_W-1:0] out_data
);
  typedef enum logic [2:0] {P_IN, P_EXP, P_DIVS, P_DIV, P_OUT} phase_e;
  phase_e phase;

  logic signed [FIX_W-1:0] xmem [MAXLEN];
  logic [16:0]             emem [MAXLEN];   // e_i, 16 fractional bits
  logic signed [FIX_W-1:0] mx;
  logic [LW-1:0]           len, idx;
  logic [31:0]             sum;
  logic                    dv_start, dv_done, dv_busy;
  logic [47:0]             dv_q, dv_r;

  // exp of one stored element
  logic signed [31:0] d, u, ip;
  logic [7:0]         f;
  logic [31:0]        e2f, ei;
  always_comb begin
    d   = 32'(xmem[idx[IW-1:0]]) - 32'(mx);       // <= 0
    u   = (d * 32'sd1477) >>> 10;                              // Q.8
    ip  = u >>> 8;                                             // floor, <= 0
    f   = u[7:0];
    e2f = 32'd65536 + 32'(f) * 32'd168 + ((32'(f) * 32'(f) * 32'd88) >> 8);
    ei  = (-ip >= 32'sd18) ? 32'd0 : (e2f >> (-ip));
  end

  seq_div #(.W(48)) u_div (
    .clk, .rst_n, .start(dv_start), .n(48'h0100_0000_0000), .d(48'(sum)),
    .busy(dv_busy), .done(dv_done), .q(dv_q), .r(dv_r)
  );

  logic [63:0] prod;
  assign prod = 64'(emem[idx[IW-1:0]]) * 64'(dv_q);   // < 2^41 since e_i <= sum

  assign in_ready = (phase == P_IN);
  assign dv_start = (phase == P_DIVS);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase     <= P_IN;
      mx        <= 16'sh8000;
      len       <= '0;
      idx       <= '0;
      sum       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (phase)
        P_IN: if (in_valid) begin
          xmem[len[IW-1:0]] <= in_data;
          if (in_data > mx) mx <= in_data;
          len <= len + LW'(1);
          if (in_last) begin
            phase <= P_EXP;
            idx   <= '0;
            sum   <= '0;
          end
        end
        P_EXP: begin
          emem[idx[IW-1:0]] <= ei[16:0];
          sum <= sum + ei;
          idx <= idx + LW'(1);
          if (idx == len - LW'(1)) phase <= P_DIVS;
        end
        P_DIVS: phase <= P_DIV;
        P_DIV: if (dv_done) begin
          phase <= P_OUT;
          idx   <= '0;
        end
        P_OUT: begin
          out_valid <= 1'b1;
          out_data  <= sat_fix(64'(prod >> 32));   // (16 + 24) - 8 fractional bits
          idx       <= idx + LW'(1);
          if (idx == len - LW'(1)) begin
            out_last <= 1'b1;
            phase    <= P_IN;
            len      <= '0;
            mx       <= 16'sh8000;
          end
        end
        default: phase <= P_IN;
      endcase
    end
  end
endmodule
