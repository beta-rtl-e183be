// layernorm_unit: layer normalisation over a row of FIX-16 values.
//
// A row of up to MAXLEN Q7.8 values x_i enters one per cycle together with
// its scale g_i and shift b_i (in_last marks the end) and is stored. Then:
//   MEAN  mean = sum(x) / L                      (sequential divider)
//   VAR   var  = sum((x_i - mean)^2) / L         (one pass + divider)
//   SQRT  sd   = sqrt(var + eps), 16 fractional bits, eps = 2^-16
//   RCP   r    = 1 / sd, 16 fractional bits      (divider)
//   OUT   y_i  = (x_i - mean) * r * g_i + b_i in Q7.8, saturated, one per cycle.
// All arithmetic is integer; only one multiply-add pass per element in VAR and
// OUT. Latency for a row of L elements: about 2L + 200 cycles after its last
// input; in_ready is low from in_last until the row has left.
// The paper keeps LayerNorm in full precision but does not give its circuit;
// this circuit is this design's choice.
module layernorm_unit
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
  input  logic signed [FIX_W-1:0] in_gamma,
  input  logic signed [FIX_W-1:0] in_beta,
  output logic                    in_ready,
  output logic                    out_valid,
  output logic                    out_last,
  output logic signed [FIX_W-1:0] out_data
);
  typedef enum logic [3:0] {
    P_IN, P_MEANS, P_MEAN, P_VAR, P_VDIVS, P_VDIV, P_SQRTS, P_SQRT, P_RCPS, P_RCP, P_OUT
  } phase_e;
  phase_e phase;

  logic signed [FIX_W-1:0] xmem [MAXLEN];
  logic signed [FIX_W-1:0] gmem [MAXLEN];
  logic signed [FIX_W-1:0] bmem [MAXLEN];
  logic [LW-1:0]           len, idx;
  logic signed [31:0]      sum, mean;
  logic [47:0]             acc, var_q16;
  logic [31:0]             sd_q16;

  logic        dv_start, dv_done, dv_busy;
  logic [47:0] dv_n, dv_d, dv_q, dv_r;
  logic        sq_start, sq_done, sq_busy;
  logic [31:0] sq_s;

  seq_div #(.W(48)) u_div (
    .clk, .rst_n, .start(dv_start), .n(dv_n), .d(dv_d),
    .busy(dv_busy), .done(dv_done), .q(dv_q), .r(dv_r)
  );
  seq_sqrt #(.W(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .v({var_q16[47:0], 16'd0} + 64'd1),
    .busy(sq_busy), .done(sq_done), .s(sq_s)
  );

  logic signed [31:0] absum;
  assign absum = (sum < 0) ? -sum : sum;

  always_comb begin
    dv_start = 1'b0;
    dv_n     = '0;
    dv_d     = 48'(len);
    unique case (phase)
      P_MEANS: begin dv_start = 1'b1; dv_n = 48'(absum); end
      P_VDIVS: begin dv_start = 1'b1; dv_n = acc;         end
      P_RCPS:  begin dv_start = 1'b1; dv_n = 48'h0001_0000_0000; dv_d = 48'(sd_q16); end
      default: ;
    endcase
  end
  assign sq_start = (phase == P_SQRTS);
  assign in_ready = (phase == P_IN);

  // per-element arithmetic
  logic signed [31:0] dx;
  logic signed [63:0] nrm, y;
  assign dx  = 32'(xmem[idx[IW-1:0]]) - mean;
  assign nrm = (64'(dx) * $signed({16'd0, dv_q})) >>> 16;                  // Q.8
  assign y   = ((nrm * 64'(gmem[idx[IW-1:0]])) >>> FIX_FRAC) + 64'(bmem[idx[IW-1:0]]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase     <= P_IN;
      len       <= '0;
      idx       <= '0;
      sum       <= '0;
      mean      <= '0;
      acc       <= '0;
      var_q16   <= '0;
      sd_q16    <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (phase)
        P_IN: if (in_valid) begin
          xmem[len[IW-1:0]] <= in_data;
          gmem[len[IW-1:0]] <= in_gamma;
          bmem[len[IW-1:0]] <= in_beta;
          sum <= sum + 32'(in_data);
          len <= len + LW'(1);
          if (in_last) phase <= P_MEANS;
        end
        P_MEANS: phase <= P_MEAN;
        P_MEAN: if (dv_done) begin
          mean  <= (sum < 0) ? -32'(dv_q) : 32'(dv_q);
          idx   <= '0;
          acc   <= '0;
          phase <= P_VAR;
        end
        P_VAR: begin
          acc <= acc + 48'(64'(dx) * 64'(dx));
          idx <= idx + LW'(1);
          if (idx == len - LW'(1)) phase <= P_VDIVS;
        end
        P_VDIVS: phase <= P_VDIV;
        P_VDIV: if (dv_done) begin
          var_q16 <= dv_q;
          phase   <= P_SQRTS;
        end
        P_SQRTS: phase <= P_SQRT;
        P_SQRT: if (sq_done) begin
          sd_q16 <= sq_s;
          phase  <= P_RCPS;
        end
        P_RCPS: phase <= P_RCP;
        P_RCP: if (dv_done) begin
          idx   <= '0;
          phase <= P_OUT;
        end
        P_OUT: begin
          out_valid <= 1'b1;
          out_data  <= sat_fix(y);
          idx       <= idx + LW'(1);
          if (idx == len - LW'(1)) begin
            out_last <= 1'b1;
            phase    <= P_IN;
            len      <= '0;
            sum      <= '0;
          end
        end
        default: phase <= P_IN;
      endcase
    end
  end
endmodule
