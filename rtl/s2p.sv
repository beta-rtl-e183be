// s2p: serial to parallel converter after the DPUs.
//
// Every finished dot-product group delivers N x P results at once (N DPUs,
// P = 8/b packed lanes each). This block appends them, in the order
// lane 0 of DPU 0..N-1, lane 1 of DPU 0..N-1, ..., to an output vector of VL
// elements and emits the vector when it is full, or on flush when it holds
// at least one element. vec_cnt gives the number of valid elements.
// N*P divides VL for every precision, so a group never straddles two vectors.
// Timing: a vector is presented for one cycle (vec_valid) the cycle after
// the group that filled it, or after flush; no back-pressure.
// The paper names the block; the element order and vector length are this
// design's choice.
module s2p
  import beta_pkg::*;
#(
  parameter int unsigned N     = 2,
  parameter int unsigned VL    = 64,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned CW   = $clog2(VL + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  prec_e            prec,
  input  logic             in_valid,
  input  logic [ACC_W-1:0] res [N][MAX_LANES],
  input  logic             flush,
  output logic             vec_valid,
  output logic [ACC_W-1:0] vec [VL],
  output logic [CW-1:0]    vec_cnt
);
  logic [ACC_W-1:0] acc [VL];
  logic [CW-1:0]    ptr, nres;

  assign nres = CW'(N * prec_lanes(prec));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr       <= '0;
      vec_valid <= 1'b0;
      vec_cnt   <= '0;
    end else begin
      vec_valid <= 1'b0;
      if (in_valid) begin
        for (int l = 0; l < int'(MAX_LANES); l++)
          for (int n = 0; n < int'(N); n++)
            if (l < int'(prec_lanes(prec)))
              acc[(int'(ptr) + l * int'(N) + n) % int'(VL)] <= res[n][l];
        if (ptr + nres == CW'(VL)) begin
          ptr       <= '0;
          vec_valid <= 1'b1;
          vec_cnt   <= CW'(VL);
        end else begin
          ptr <= ptr + nres;
        end
      end else if (flush && ptr != '0) begin
        ptr       <= '0;
        vec_valid <= 1'b1;
        vec_cnt   <= ptr;
      end
    end
  end

  // The output vector is the accumulation register; it is stable while valid.
  always_comb for (int i = 0; i < int'(VL); i++) vec[i] = acc[i];

  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && flush));
endmodule
