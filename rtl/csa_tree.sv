// csa_tree: compressor tree that reduces NIN operands of W bits to two.
//
// Each level groups its operands by four and reduces every group to two with a
// row of 4:2 compressors (comp42). When three operands are left over they go
// through a row of full adders (3:2); one or two left-over operands pass to the
// next level unchanged. The number of levels therefore grows with log2(NIN),
// and no carry ripples across the word inside the tree. The output pair
// (s, c) satisfies s + c = sum of all operands (mod 2^W); a carry-propagate
// adder downstream turns it into one number.
// Purely combinational. The paper gives the idea (a 4:2-compressor based adder
// tree) and the compressor cell; the exact grouping at each level is this
// design's choice.
module csa_tree #(
  parameter int unsigned NIN = 10,
  parameter int unsigned W   = 32
) (
  input  logic [W-1:0] ops [NIN],
  output logic [W-1:0] s,
  output logic [W-1:0] c
);
  // Operand count after one level.
  function automatic int unsigned next_n(int unsigned n);
    if (n <= 2) return n;
    return 2 * (n / 4) + ((n % 4 == 3) ? 2 : (n % 4));
  endfunction

  function automatic int unsigned n_at(int unsigned lvl);
    int unsigned n = NIN;
    for (int unsigned i = 0; i < lvl; i++) n = next_n(n);
    return n;
  endfunction

  function automatic int unsigned count_levels();
    int unsigned n = NIN;
    int unsigned l = 0;
    while (n > 2) begin
      n = next_n(n);
      l++;
    end
    return l;
  endfunction

  localparam int unsigned NLEV = count_levels();

  // Level l reads src (the previous level's dst) and writes dst.
  for (genvar l = 0; l < NLEV; l++) begin : g_lvl
    localparam int unsigned N  = n_at(l);
    localparam int unsigned NG = N / 4;
    localparam int unsigned R  = N % 4;
    logic [W-1:0] src [N];
    logic [W-1:0] dst [next_n(N)];
    for (genvar k = 0; k < N; k++) begin : g_src
      if (l == 0) begin : g_first
        assign src[k] = ops[k];
      end else begin : g_prev
        assign src[k] = g_lvl[l-1].dst[k];
      end
    end
    for (genvar g = 0; g < NG; g++) begin : g_c42
      comp42 #(.W(W)) u_c42 (
        .a (src[4*g]),   .b (src[4*g+1]),
        .c (src[4*g+2]), .d (src[4*g+3]),
        .s (dst[2*g]),   .co(dst[2*g+1])
      );
    end
    if (R == 3) begin : g_fa
      logic [W-1:0] x, y, z, cy;
      assign x  = src[4*NG];
      assign y  = src[4*NG+1];
      assign z  = src[4*NG+2];
      assign cy = (x & y) | (x & z) | (y & z);
      assign dst[2*NG]   = x ^ y ^ z;
      assign dst[2*NG+1] = {cy[W-2:0], 1'b0};
    end else begin : g_pass
      for (genvar r = 0; r < R; r++) begin : g_r
        assign dst[2*NG+r] = src[4*NG+r];
      end
    end
  end

  if (NLEV == 0) begin : g_short
    assign s = ops[0];
    if (NIN == 1) begin : g_one
      assign c = '0;
    end else begin : g_two
      assign c = ops[1];
    end
  end else begin : g_out
    assign s = g_lvl[NLEV-1].dst[0];
    assign c = g_lvl[NLEV-1].dst[1];
  end
endmodule
