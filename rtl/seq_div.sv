// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// Computes q = n / d and r = n % d for W-bit unsigned operands. start loads
// the operands; done pulses W+1 cycles later with q and r, which then hold
// until the next start. Division by zero gives q = all ones.
// A helper of the normalisation units, written for this design.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] n,
  input  logic [W-1:0] d,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] q,
  output logic [W-1:0] r
);
  logic [W-1:0] dd;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0] trial;

  assign trial = {r, q[W-1]} - {1'b0, dd};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      q    <= '0;
      r    <= '0;
      dd   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        q    <= n;
        r    <= '0;
        dd   <= d;
        cnt  <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          r <= trial[W-1:0];
          q <= {q[W-2:0], 1'b1};
        end else begin
          r <= {r[W-2:0], q[W-1]};
          q <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(W+1))'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
