// seq_sqrt: unsigned integer square root, one result bit per cycle.
//
// Computes s = floor(sqrt(v)) for a W-bit v (W even) by the classic
// digit-by-digit method: each cycle brings down two bits of v and tries to
// append a 1 to the root. start loads v; done pulses W/2 cycles later and s
// holds until the next start.
// A helper of the layer normalisation unit, written for this design.
module seq_sqrt #(
  parameter int unsigned W = 48
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   v,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] s
);
  logic [W-1:0]   rem_v;      // bits of v not yet brought down
  logic [W/2+1:0] rem;        // partial remainder
  logic [W/2+2:0] trial;      // one spare bit for the sign
  logic [$clog2(W)-1:0] cnt;

  assign trial = {rem[W/2:0], rem_v[W-1:W-2]} - {1'b0, s, 2'b01};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      s     <= '0;
      rem   <= '0;
      rem_v <= '0;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        s     <= '0;
        rem   <= '0;
        rem_v <= v;
        cnt   <= '0;
      end else if (busy) begin
        if (!trial[W/2+2]) begin
          rem <= trial[W/2+1:0];
          s   <= {s[W/2-2:0], 1'b1};
        end else begin
          rem <= {rem[W/2-1:0], rem_v[W-1:W-2]};
          s   <= {s[W/2-2:0], 1'b0};
        end
        rem_v <= {rem_v[W-3:0], 2'b00};
        cnt   <= cnt + 1'b1;
        if (cnt == ($clog2(W))'(W/2 - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
